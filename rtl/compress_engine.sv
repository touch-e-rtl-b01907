// compress_engine: the compression side of the compression-decompression
// engine that sits on the data bus in front of the data array. It runs BDI
// (bdi_compressor) and FPC (fpc_compressor) on the block in parallel and
// keeps the result of the smaller size class, BDI on a tie, as the paper's
// engine keeps the better of the two. It reports the size class (16, 32, 48
// or 64 bytes), the 3-bit code that TADA stores with the block and the
// payload. A 48-byte-class result keeps C_UNCOMP, as such blocks are stored
// uncompressed. Purely combinational; a register in front of or behind it
// gives the single cycle of latency that the cited algorithms take.
module compress_engine
  import touche_pkg::*;
(
  input  logic [LINE_W-1:0]  data,
  output comp_t              comp,
  output size_t_e            size,
  output logic [CPAY_W-1:0]  payload
);

  comp_t                b_comp;
  size_t_e              b_size, f_size;
  logic [CPAY_W-1:0]    b_pay;
  logic [PAYLOAD_W-1:0] f_pay;
  logic [9:0]           f_bits;

  bdi_compressor u_bdi (.data, .comp(b_comp), .size(b_size), .payload(b_pay));
  fpc_compressor u_fpc (.data, .bits(f_bits), .size(f_size), .payload(f_pay));

  always_comb begin
    if (f_size < b_size) begin
      size    = f_size;
      payload = CPAY_W'(f_pay);
      case (f_size)
        SZ_16:   comp = C_FPC16;
        SZ_32:   comp = C_FPC32;
        default: comp = C_UNCOMP;
      endcase
    end else begin
      size    = b_size;
      comp    = b_comp;
      payload = b_pay;
    end
  end

endmodule
