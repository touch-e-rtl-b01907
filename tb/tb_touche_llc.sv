// tb_touche_llc: end-to-end test of the compressed LLC controller.
//
// The cache is shrunk to 4 sets (SET_BITS=2, so addresses are 39 bits) with
// the paper's 8 ways and 5/30-cycle tag/data latencies, and a 16-read window
// for the latency monitor. A behavioural main memory answers reads after a
// programmable delay and accepts write-backs. Block contents are a function
// of the address, chosen by tag bits 4:3 so that every class is exercised:
// 0 = all zero (or, for some written data, a sparse block that only FPC
// compresses), 1 = BDI base8/delta1 (15 B), 2 = base8/delta2 (22 B, 32-byte
// class), 3 = incompressible.
//
// Directed scenarios make each mechanism happen: uncompressed install and hit,
// arbitrary compressed install and hit, a signature collision (second probe,
// 70 cycles), superblock formation and superblock hits, an L2 write hitting a
// superblock, a superblock split on eviction with dirty write-backs, an
// uncompressed dirty write-back, and the dynamic switch that turns
// compression off when memory is fast and back on when it is slow. A random
// phase follows. Every read is compared with a reference copy of memory
// contents, hit latencies are checked, and every event counter must be
// non-zero at the end.
module tb_touche_llc;
  import touche_pkg::*;

  localparam int unsigned SET_BITS = 2;
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

  touche_llc #(.SET_BITS(SET_BITS), .TAG_LAT(TL), .DATA_LAT(DL),
               .WINDOW_LOG2(4)) dut (
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
  int mem_lat = 3000;
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

  // hits served from an FPC payload
  int fpc_hits = 0;
  always @(negedge clk)
    if (resp_valid && resp_hit && (dut.u_decomp.comp == C_FPC16 || dut.u_decomp.comp == C_FPC32))
      fpc_hits++;

  // ----------------------------------------------------------- scenarios
  logic h; longint lat;
  logic [TAG_W-1:0] tA, tB, tX, tY, sbb;
  llc_stats_t s0;

  initial begin
    req_valid = 1'b0; req_op = REQ_READ; req_addr = '0; req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (boot_done);
    check(compress_en, "compression enabled after reset");

    // 1. uncompressed install and hit
    rd(mk(29'h0000_0018, 3), h, lat);  check(!h, "cold miss");
    rd(mk(29'h0000_0018, 3), h, lat);
    check(h, "uncompressed hit");
    check(lat == TL + DL, $sformatf("uncompressed hit latency %0d", lat));

    // 2. arbitrary compressed blocks, then a signature collision
    tA = 29'h0010_0008; tX = 29'h0020_0008; tY = 29'h0030_0008;
    tB = tA ^ 29'h0000_0201;               // same XOR fold as tA
    rd(mk(tA, 0), h, lat); rd(mk(tX, 0), h, lat); rd(mk(tY, 0), h, lat);
    rd(mk(tB, 0), h, lat); check(!h, "collision tag misses first");
    rd(mk(tX, 0), h, lat);
    check(h && lat == TL + DL, $sformatf("compressed hit latency %0d", lat));
    s0 = stats;
    rd(mk(tB, 0), h, lat);
    check(h, "hit after signature collision");
    check(lat == 2 * (TL + DL), $sformatf("collision latency %0d", lat));
    check(stats.sig_collisions == s0.sig_collisions + 1, "one collision counted");

    // 3. superblock formation in set 1
    sbb = 29'h0040_0008;
    for (int j = 0; j < 3; j++) rd(mk(sbb | 29'(j), 1), h, lat);
    s0 = stats;
    rd(mk(sbb | 29'd3, 1), h, lat);
    check(stats.sb_formed == s0.sb_formed + 1, "superblock formed");
    for (int j = 0; j < 4; j++) begin
      rd(mk(sbb | 29'(j), 1), h, lat);
      check(h && lat == TL + DL, $sformatf("superblock hit %0d latency %0d", j, lat));
    end
    // an L2 write hitting a superblock member; the line re-forms dirty
    wr(mk(sbb | 29'd1, 1), 7);
    check(stats.sb_formed == s0.sb_formed + 2, "superblock re-formed after write");
    rd(mk(sbb | 29'd1, 1), h, lat); check(h, "written superblock member hits");
    rd(mk(29'h0000_0018, 3), h, lat);     // a miss-free filler keeps the window busy
    // 4. fill set 1 with incompressible lines, then evict from the superblock
    for (int i = 0; i < 7; i++) rd(mk(29'h0100_0018 + 29'(i << 20), 1), h, lat);
    s0 = stats;
    rd(mk(29'h0050_0000, 1), h, lat);      // a zero block needing room
    check(stats.sb_split == s0.sb_split + 1, "superblock split on eviction");
    check(stats.writebacks > s0.writebacks, "dirty superblock members written back");
    for (int j = 0; j < 4; j++) rd(mk(sbb | 29'(j), 1), h, lat);

    // 5. uncompressed dirty line written back
    wr(mk(29'h0000_1018, 2), 3);
    for (int i = 0; i < 8; i++) rd(mk(29'h0200_0018 + 29'(i << 20), 2), h, lat);
    rd(mk(29'h0000_1018, 2), h, lat);
    check(!h, "evicted dirty line misses");

    // 6. fast memory: compression switches off, then back on
    mem_lat = 2;
    for (int i = 0; i < 64 && compress_en; i++)
      rd(mk(29'h0300_0010 + 29'(i << 20), i % 4), h, lat);
    check(!compress_en, "compression disabled with fast memory");
    s0 = stats;
    rd(mk(29'h0060_0008, 3), h, lat);
    check(stats.inst_uncomp == s0.inst_uncomp + 1 && stats.inst_comp == s0.inst_comp,
          "compressible block installed uncompressed while disabled");
    rd(mk(29'h0060_0008, 3), h, lat); check(h, "hit on it");
    mem_lat = 400;
    for (int i = 0; i < 64 && !compress_en; i++)
      rd(mk(29'h0400_0010 + 29'(i << 20), i % 4), h, lat);
    check(compress_en, "compression re-enabled with slow memory");

    // 7. random traffic over a small pool
    mem_lat = 300;
    for (int n = 0; n < 600; n++) begin
      logic [TAG_W-1:0] t;
      int s;
      t = 29'(($urandom % 6) << 20) | 29'(($urandom % 4) << 3) | 29'($urandom % 4);
      s = $urandom % 4;
      if ($urandom % 3 == 0) wr(mk(t, s), $urandom % 1000);
      else                   rd(mk(t, s), h, lat);
    end

    // 8. a block only FPC compresses: written, then read back compressed
    s0 = stats;
    wr(mk(29'h0123_4560, 3), 1);
    rd(mk(29'h0123_4560, 3), h, lat);
    check(h && stats.hits_comp == s0.hits_comp + 1, "FPC block hit as compressed");
    check(fpc_hits > 0, "event: FPC-compressed hit");

    $display("fpc_hits=%0d", fpc_hits);
    $display("events: reads=%0d writes=%0d hit_u=%0d hit_c=%0d hit_sb=%0d miss=%0d coll=%0d sbprobe=%0d inst_u=%0d inst_c=%0d sb_form=%0d sb_split=%0d evict=%0d wb=%0d switch=%0d",
      stats.reads, stats.writes, stats.hits_uncomp, stats.hits_comp, stats.hits_super,
      stats.misses, stats.sig_collisions, stats.marker_probes, stats.inst_uncomp,
      stats.inst_comp, stats.sb_formed, stats.sb_split, stats.block_evicts,
      stats.writebacks, stats.mode_switches);
    check(stats.hits_uncomp > 0, "event: uncompressed hit");
    check(stats.hits_comp > 0, "event: arbitrary compressed hit");
    check(stats.hits_super > 0, "event: superblock hit");
    check(stats.misses > 0, "event: miss");
    check(stats.sig_collisions > 0, "event: signature collision");
    check(stats.marker_probes > 0, "event: marker-matched probe");
    check(stats.inst_uncomp > 0, "event: uncompressed install");
    check(stats.inst_comp > 0, "event: compressed install");
    check(stats.sb_formed > 0, "event: superblock formed");
    check(stats.sb_split > 0, "event: superblock split");
    check(stats.block_evicts > 0, "event: block eviction");
    check(stats.writebacks > 0 && wb_seen == int'(stats.writebacks), "event: write-back");
    check(stats.mode_switches >= 2, "event: compression mode switches");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
