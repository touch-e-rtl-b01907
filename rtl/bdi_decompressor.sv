// bdi_decompressor: the decompression side of the compression-decompression
// engine. It rebuilds a 64-byte block from a BDI payload and its 3-bit
// compressibility code, the code that TADA keeps in each block's record.
//
// Element 0 is the base; element k is base + sign-extended delta k, modulo the
// element width (the stored encodings ZEROS, B8D1, B4D1 and B8D2 are listed
// in bdi_compressor). Any other code passes the payload through; FPC
// payloads are rebuilt by fpc_decompressor and decompress_engine selects
// between the two. Purely combinational.
module bdi_decompressor
  import touche_pkg::*;
(
  input  comp_t              comp,
  input  logic [CPAY_W-1:0]  payload,
  output logic [LINE_W-1:0]  data
);

  function automatic logic [LINE_W-1:0] expand(input logic [CPAY_W-1:0] p,
                                               input int eb, input int db);
    logic [63:0] emask, dmask, base, dl, e;
    logic [LINE_W-1:0] d;
    int n;
    n     = 64 / eb;
    emask = (eb == 8) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << (8*eb)) - 64'd1);
    dmask = (64'd1 << (8*db)) - 64'd1;
    base  = p[63:0] & emask;
    d     = LINE_W'(base);
    for (int k = 1; k < 32; k++) begin
      if (k < n) begin
        dl = 64'(p >> (8*eb + (k-1)*8*db)) & dmask;
        if (dl[8*db-1]) dl = dl | ~dmask;          // sign extension
        e  = (base + dl) & emask;
        d  = d | (LINE_W'(e) << (k*8*eb));
      end
    end
    return d;
  endfunction

  always_comb begin
    case (comp)
      C_ZEROS: data = '0;
      C_B8D1:  data = expand(payload, 8, 1);
      C_B4D1:  data = expand(payload, 4, 1);
      C_B8D2:  data = expand(payload, 8, 2);
      default: data = LINE_W'(payload);
    endcase
  end

endmodule
