// tb_smark: checks the superblock marker. After `boot` the marker must be the
// seeded 16-bit Galois LFSR (taps 16,14,13,11) stepped BOOT_STEPS times,
// `ready` must rise BOOT_STEPS+1 cycles after the boot pulse ends, and the per-way compare
// must flag exactly the ways whose tag[26:11] equals the marker.
module tb_smark;
  import touche_pkg::*;
  logic clk = 0, rst_n = 0, boot = 0;
  always #5 clk = ~clk;
  localparam logic [31:0] SEED = 32'h1357_2468;
  logic [7:0][TAG_W-1:0] way_tag;
  logic [MARK_W-1:0] marker;
  logic ready;
  logic [7:0] mm;
  smark #(.WAYS(8), .BOOT_STEPS(16)) dut (.clk, .rst_n, .boot, .seed(SEED),
    .way_tag, .marker, .ready, .mark_match(mm));
  int checks = 0, failures = 0, cycles = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [15:0] m;
  initial begin
    way_tag = '0;
    #12 rst_n = 1;
    @(negedge clk) boot = 1; @(negedge clk) boot = 0;
    while (!ready) begin @(negedge clk); cycles++; end
    check(cycles == 17, $sformatf("ready after %0d cycles", cycles));
    m = (SEED[31:16] ^ SEED[15:0]) | 16'h1;
    for (int i = 0; i < 16; i++) m = m[0] ? ((m >> 1) ^ 16'hB400) : (m >> 1);
    check(marker == m, $sformatf("marker %h expected %h", marker, m));
    for (int n = 0; n < 50; n++) begin
      logic [7:0] exp;
      for (int w = 0; w < 8; w++) begin
        way_tag[w] = 29'({$urandom} % (1 << 29));
        if ($urandom % 2) way_tag[w][26:11] = marker;
        exp[w] = (way_tag[w][26:11] == marker);
      end
      #1 check(mm == exp, "marker match per way");
      check(exp == 0 || mm != 0, "some match seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
