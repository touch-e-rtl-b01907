// decompress_engine: the decompression side of the compression-decompression
// engine. The 3-bit code that TADA keeps with each block selects the BDI
// (bdi_decompressor) or FPC (fpc_decompressor) result; both run in
// parallel on the payload. Purely combinational.
module decompress_engine
  import touche_pkg::*;
(
  input  comp_t              comp,
  input  logic [CPAY_W-1:0]  payload,
  output logic [LINE_W-1:0]  data
);

  logic [LINE_W-1:0] b_data, f_data;

  bdi_decompressor u_bdi (.comp, .payload, .data(b_data));
  fpc_decompressor u_fpc (.payload(PAYLOAD_W'(payload)), .data(f_data));

  assign data = (comp == C_FPC16 || comp == C_FPC32) ? f_data : b_data;

endmodule
