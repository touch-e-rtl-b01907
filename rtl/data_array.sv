// data_array: the LLC data array, 64-byte cachelines addressed by set and
// way (8192 x 8 lines, 4 MB, for the paper's configuration).
//
// One synchronous read port (line valid the cycle after `rd_en`) and one
// synchronous write port of a whole line. The paper's 30-cycle data access
// belongs to the SRAM macro this array stands for; the controller adds those
// wait cycles. Contents are not reset: a line is only read when its tag
// entry says it holds something.
module data_array
  import touche_pkg::*;
#(
  parameter int unsigned SETS = 8192,
  parameter int unsigned WAYS = 8
) (
  input  logic                             clk,
  input  logic                             rd_en,
  input  logic [$clog2(SETS*WAYS)-1:0]     rd_addr,   // {set, way}
  output logic [LINE_W-1:0]                rd_data,
  input  logic                             wr_en,
  input  logic [$clog2(SETS*WAYS)-1:0]     wr_addr,
  input  logic [LINE_W-1:0]                wr_data
);

  logic [LINE_W-1:0] mem [SETS*WAYS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
