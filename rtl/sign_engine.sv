// sign_engine: the signature generator of the tag manager.
//
// For each query port the low 27 bits of the 29-bit tag are cut into three
// 9-bit segments that are XORed together. The 4 low bits of the fold index a
// 16-entry table and the 5 high bits a 32-entry table; the two table outputs,
// 5 bits above 4 bits, form the 9-bit signature. In superblock mode the two
// lowest tag bits are ignored (forced to zero before the fold), so the four
// neighbouring blocks of a superblock share one signature. All of this
// follows the paper.
//
// The paper fills the tables at boot with unique numbers but does not say
// how. Here each table is loaded, one cycle after `boot` is pulsed, with an
// affine permutation i -> (a*i + b) mod N taken from `seed` (a is forced odd,
// so every entry is different). The tables are registers; the lookup itself
// is combinational, so a signature is ready in the cycle its tag is
// presented. Several ports share one pair of tables.
module sign_engine
  import touche_pkg::*;
#(
  parameter int unsigned NPORTS = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   boot,                // load the tables
  input  logic [31:0]            seed,                // boot-time entropy
  input  logic [TAG_W-1:0]       tag_in  [NPORTS],
  input  logic                   sb_mode [NPORTS],    // ignore tag[1:0]
  output logic [SIG_W-1:0]       sig_out [NPORTS]
);

  logic [3:0] lut16 [16];
  logic [4:0] lut32 [32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) lut16[i] <= 4'(i);
      for (int i = 0; i < 32; i++) lut32[i] <= 5'(i);
    end else if (boot) begin
      for (int i = 0; i < 16; i++)
        lut16[i] <= 4'((4'(i) * {seed[2:0], 1'b1}) + seed[7:4]);
      for (int i = 0; i < 32; i++)
        lut32[i] <= 5'((5'(i) * {seed[11:8], 1'b1}) + seed[20:16]);
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      logic [TAG_W-1:0] t;
      logic [SIG_W-1:0] fold;
      t = tag_in[p];
      if (sb_mode[p]) t[1:0] = 2'b00;
      fold = t[8:0] ^ t[17:9] ^ t[26:18];
      sig_out[p] = {lut32[fold[8:4]], lut16[fold[3:0]]};
    end
  end

endmodule
