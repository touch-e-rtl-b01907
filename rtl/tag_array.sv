// tag_array: the LLC tag array, one row per set holding the 34-bit tag entry
// of every way (8192 sets x 8 ways for the paper's 4 MB, 8-way cache).
//
// All ways of a set are read together, as the paper's tag lookup searches
// them in parallel. One synchronous read port (data valid the cycle after
// `rd_en`) and one synchronous write port that writes a whole set row. The
// paper's 5-cycle tag access belongs to the SRAM macro this array stands for;
// the controller adds those wait cycles. Contents are not reset: the
// controller clears every row at boot.
module tag_array
  import touche_pkg::*;
#(
  parameter int unsigned SETS = 8192,
  parameter int unsigned WAYS = 8
) (
  input  logic                         clk,
  input  logic                         rd_en,
  input  logic [$clog2(SETS)-1:0]      rd_set,
  output tag_entry_t [WAYS-1:0]        rd_data,
  input  logic                         wr_en,
  input  logic [$clog2(SETS)-1:0]      wr_set,
  input  tag_entry_t [WAYS-1:0]        wr_data
);

  tag_entry_t [WAYS-1:0] mem [SETS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_set] <= wr_data;
    if (rd_en) rd_data <= mem[rd_set];
  end

endmodule
