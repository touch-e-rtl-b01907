// tb_sign_engine: checks the signature generator.
// After boot the two tables must be permutations, so the 9-bit signature is a
// bijection of the 9-bit XOR fold: all 512 folds must give 512 different
// signatures. Tags with equal folds must share a signature, the superblock
// mode must ignore tag bits 1:0 only, and a set of tags is compared with a
// reference built from the fold and the boot-time table formula.
module tb_sign_engine;
  import touche_pkg::*;
  logic clk = 0, rst_n = 0, boot = 0;
  always #5 clk = ~clk;
  localparam logic [31:0] SEED = 32'h3A5C_9E17;
  logic [TAG_W-1:0] tag_in [2];
  logic             sb     [2];
  logic [SIG_W-1:0] sig    [2];
  sign_engine #(.NPORTS(2)) dut (.clk, .rst_n, .boot, .seed(SEED),
                                 .tag_in, .sb_mode(sb), .sig_out(sig));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [SIG_W-1:0] ref_sig(logic [TAG_W-1:0] t, bit sbm);
    logic [8:0] f; logic [3:0] lo; logic [4:0] hi;
    if (sbm) t[1:0] = 2'b00;
    f  = t[8:0] ^ t[17:9] ^ t[26:18];
    lo = 4'((f[3:0] * {SEED[2:0], 1'b1}) + SEED[7:4]);
    hi = 5'((f[8:4] * {SEED[11:8], 1'b1}) + SEED[20:16]);
    return {hi, lo};
  endfunction
  bit seen [512];
  initial begin
    tag_in[0] = '0; tag_in[1] = '0; sb[0] = 0; sb[1] = 0;
    #12 rst_n = 1;
    @(negedge clk) boot = 1; @(negedge clk) boot = 0;
    // bijection over the fold (fold = low 9 bits when the rest is zero)
    for (int f = 0; f < 512; f++) begin
      tag_in[0] = 29'(f); #1;
      check(!seen[sig[0]], $sformatf("signature %0d reused", sig[0]));
      seen[sig[0]] = 1;
    end
    for (int n = 0; n < 300; n++) begin
      logic [TAG_W-1:0] t, u;
      t = {$urandom, $urandom} % (1 << 29);
      u = t ^ 29'h0000_0201 ^ (29'($urandom % 512) * 29'h0004_0200);  // equal fold
      tag_in[0] = t; tag_in[1] = u; sb[0] = 0; sb[1] = 0; #1;
      check(sig[0] == ref_sig(t, 0), "signature matches reference");
      check(sig[0] == sig[1], "equal folds give equal signatures");
      tag_in[1] = t ^ 29'(1 + $urandom % 3); sb[0] = 1; sb[1] = 1; #1;
      check(sig[0] == sig[1], "superblock mode ignores tag[1:0]");
      check(sig[0] == ref_sig(t, 1), "superblock signature matches reference");
      tag_in[1] = t ^ 29'h4; #1;
      check(sig[0] != sig[1], "superblock mode keeps tag[2]");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
