// tb_touche_llc_full: the compressed LLC at its full default size (4 MB,
// 8192 sets x 8 ways, 48-bit addresses, 5/30-cycle tag/data latencies),
// taken through boot and one of each basic operation: an uncompressed miss
// and hit, arbitrary compressed installs and a hit, a signature collision
// resolved by the second probe, a superblock built from four neighbours and
// hit, a dirty block written back, and a block that only FPC compresses
// written and read back. Reads are checked against a reference
// copy of memory and hit latencies against 35 and 70 cycles. Block contents
// follow the same address-derived classes as tb_touche_llc.
module tb_touche_llc_full;
  import touche_pkg::*;

  localparam int unsigned SET_BITS = 13;
  localparam int unsigned ADDR_W   = TAG_W + SET_BITS + OFFSET_W;
  localparam int unsigned TL = 5, DL = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              boot_done, req_valid, req_ready, resp_valid, resp_hit;
  req_op_t           req_op, resp_op;
  logic [ADDR_W-1:0] req_addr, mem_rd_addr, mem_wr_addr;
  logic [LINE_W-1:0] req_wdata, resp_data, mem_rd_resp_data, mem_wr_data;
  logic              mem_rd_valid, mem_rd_ready, mem_rd_resp_valid;
  logic              mem_wr_valid, mem_wr_ready, compress_en;
  logic [MARK_W-1:0] marker;
  llc_stats_t        stats;

  touche_llc dut (
    .clk, .rst_n, .boot_seed(32'hC0FFEE11), .boot_done,
    .req_valid, .req_ready, .req_op, .req_addr, .req_wdata,
    .resp_valid, .resp_op, .resp_hit, .resp_data,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rd_resp_valid,
    .mem_rd_resp_data, .mem_wr_valid, .mem_wr_ready, .mem_wr_addr,
    .mem_wr_data, .compress_en, .marker, .stats);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  // ---------------------------------------------------------- data patterns
  function automatic logic [TAG_W-1:0] tag_of(input logic [ADDR_W-1:0] a);
    return {a[ADDR_W-1 -: TAG_W-2], a[7:6]};
  endfunction
  function automatic logic [ADDR_W-1:0] mk(input logic [TAG_W-1:0] t,
                                           input int s);
    return {t[TAG_W-1:2], SET_BITS'(s), t[1:0], 6'b0};
  endfunction
  function automatic logic [LINE_W-1:0] gen(input logic [ADDR_W-1:0] a,
                                            input int unsigned salt);
    logic [LINE_W-1:0] d;
    logic [63:0] base, h;
    logic [TAG_W-1:0] t;
    t = tag_of(a);
    base = {32'(a) ^ salt, 32'h9E37_79B9 ^ 32'(a >> 3)};
    d = '0;
    for (int k = 0; k < 8; k++) begin
      case (t[4:3])
        // class 0: all zero, or (salt % 4 == 1) one large and one small
        // 32-bit word in a zero block, which only FPC compresses to 16 B
        2'd0: d[k*64 +: 64] = (salt % 4 != 1) ? 64'd0 :
                              (k == 0) ? {32'd0, 32'(a) | 32'h4000_0001} :
                              (k == 2) ? 64'(8'(salt) | 8'h10) << 32 : 64'd0;
        2'd1: d[k*64 +: 64] = base + 64'(k * ((salt % 13) + 1));
        2'd2: d[k*64 +: 64] = base + 64'(k * (1000 + salt % 500));
        default: begin
          h = base * 64'h9E37_79B9_7F4A_7C15 + 64'(k) * 64'hD6E8_FEB8_6659_FD93;
          d[k*64 +: 64] = h ^ (h >> 29);
        end
      endcase
    end
    return d;
  endfunction

  // ------------------------------------------------- main memory model
  logic [LINE_W-1:0] dram [logic [ADDR_W-1:0]];
  logic [LINE_W-1:0] refm [logic [ADDR_W-1:0]];
  int mem_lat = 300;
  int wb_seen = 0;

  function automatic logic [LINE_W-1:0] ref_of(input logic [ADDR_W-1:0] a);
    return refm.exists(a) ? refm[a] : gen(a, 0);
  endfunction

  assign mem_rd_ready = 1'b1;
  assign mem_wr_ready = 1'b1;
  initial begin
    mem_rd_resp_valid = 1'b0;
    mem_rd_resp_data  = '0;
    forever begin
      @(negedge clk);
      if (mem_rd_valid) begin
        logic [ADDR_W-1:0] a;
        a = mem_rd_addr;
        repeat (mem_lat) @(negedge clk);
        mem_rd_resp_valid = 1'b1;
        mem_rd_resp_data  = dram.exists(a) ? dram[a] : gen(a, 0);
        @(negedge clk);
        mem_rd_resp_valid = 1'b0;
      end
    end
  end
  always @(negedge clk)
    if (mem_wr_valid && mem_wr_ready) begin
      dram[mem_wr_addr] = mem_wr_data;
      wb_seen = wb_seen + 1;
    end

  // ----------------------------------------------------- request driver
  task automatic access(input req_op_t op, input logic [ADDR_W-1:0] a,
                        input logic [LINE_W-1:0] wd,
                        output logic hit, output longint lat);
    longint t0;
    // signals are driven and sampled at the falling edge
    @(negedge clk);
    req_valid = 1'b1; req_op = op; req_addr = a; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    t0 = cyc;                      // accepted at the next rising edge
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    lat = cyc - t0;
    hit = resp_hit;
    // let an install that follows a read miss finish before going on
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    check(resp_op == op, "response type");
    if (op == REQ_READ)
      check(resp_data == ref_of(a), $sformatf("read data of %h", a));
    else
      refm[a] = wd;
  endtask

  task automatic rd(input logic [ADDR_W-1:0] a, output logic hit, output longint lat);
    access(REQ_READ, a, '0, hit, lat);
  endtask
  task automatic wr(input logic [ADDR_W-1:0] a, input int unsigned salt);
    logic h; longint l;
    access(REQ_WRITE, a, gen(a, salt), h, l);
  endtask

  // ----------------------------------------------------------- scenarios
  logic h; longint lat;
  logic [TAG_W-1:0] tA, tB, tX, tY, sbb;
  llc_stats_t s0;

  initial begin
    req_valid = 1'b0; req_op = REQ_READ; req_addr = '0; req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (boot_done);
    check(cyc >= 8192, "boot clears all 8192 sets");

    rd(mk(29'h0000_0018, 77), h, lat);  check(!h, "cold miss");
    rd(mk(29'h0000_0018, 77), h, lat);
    check(h && lat == TL + DL, $sformatf("uncompressed hit latency %0d", lat));

    tA = 29'h0010_0008; tX = 29'h0020_0008; tY = 29'h0030_0008;
    tB = tA ^ 29'h0000_0201;
    rd(mk(tA, 5), h, lat); rd(mk(tX, 5), h, lat); rd(mk(tY, 5), h, lat);
    rd(mk(tB, 5), h, lat);
    rd(mk(tX, 5), h, lat);
    check(h && lat == TL + DL, $sformatf("compressed hit latency %0d", lat));
    s0 = stats;
    rd(mk(tB, 5), h, lat);
    check(h && lat == 2 * (TL + DL), $sformatf("collision latency %0d", lat));
    check(stats.sig_collisions == s0.sig_collisions + 1, "collision counted");

    sbb = 29'h0040_0008;
    for (int j = 0; j < 4; j++) rd(mk(sbb | 29'(j), 8191), h, lat);
    check(stats.sb_formed == 1, "superblock formed");
    for (int j = 0; j < 4; j++) begin
      rd(mk(sbb | 29'(j), 8191), h, lat);
      check(h && lat == TL + DL, $sformatf("superblock hit latency %0d", lat));
    end

    wr(mk(29'h0000_1018, 100), 3);
    for (int i = 0; i < 8; i++) rd(mk(29'h0200_0018 + 29'(i << 20), 100), h, lat);
    check(stats.writebacks == 1 && wb_seen == 1, "dirty line written back");
    rd(mk(29'h0000_1018, 100), h, lat);
    check(!h, "evicted line misses and returns written data");

    // a block only FPC compresses, written and read back compressed
    s0 = stats;
    wr(mk(29'h0123_4560, 4000), 1);
    rd(mk(29'h0123_4560, 4000), h, lat);
    check(h && lat == TL + DL && stats.hits_comp == s0.hits_comp + 1,
          "FPC block hit as compressed in 35 cycles");

    $display("events: hit_u=%0d hit_c=%0d hit_sb=%0d miss=%0d coll=%0d sb_form=%0d wb=%0d",
      stats.hits_uncomp, stats.hits_comp, stats.hits_super, stats.misses,
      stats.sig_collisions, stats.sb_formed, stats.writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
