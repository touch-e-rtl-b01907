// fpc_compressor: the Frequent Pattern Compression half of the compression
// engine. The block is treated as sixteen 32-bit words; each word is given
// the first of these patterns that it matches (the 3-bit prefix is its code):
//
//   prefix  pattern                                   data bits
//   000     zero word                                 0
//   001     4-bit value, sign-extended                4
//   010     8-bit value, sign-extended                8
//   110     one byte repeated four times              8
//   011     16-bit value, sign-extended               16
//   100     upper halfword, lower halfword zero       16
//   101     two halfwords, each a sign-extended byte  16
//   111     uncompressed word                         32
//
// Payload layout: the sixteen prefixes first (word 0 in bits 2:0, 48 bits in
// all), then the data fields of the words in word order, packed from bit 48.
// The compressed size is 48 + the data bits. The pattern set follows the
// published FPC scheme; coding each zero word on its own (instead of zero
// runs) and this layout are this design's choices. `bits` is the size, and
// the size class is 16 B up to 120 bits (so a block can also join a
// superblock), 32 B up to 256 bits, 48 B up to 384 bits, else 64 B. Only the
// first 256 payload bits are output, as larger results are not stored.
// Purely combinational.
module fpc_compressor
  import touche_pkg::*;
(
  input  logic [LINE_W-1:0]    data,
  output logic [9:0]           bits,      // compressed size in bits
  output size_t_e              size,
  output logic [PAYLOAD_W-1:0] payload
);

  localparam int unsigned NW = LINE_W / 32;   // 16 words

  logic [NW-1:0][2:0]  pre;
  logic [NW-1:0][5:0]  len;
  logic [NW-1:0][31:0] fld;

  always_comb begin
    for (int i = 0; i < NW; i++) begin
      logic [31:0] w;
      w = data[32*i +: 32];
      if (w == '0) begin
        pre[i] = 3'b000; len[i] = 6'd0;  fld[i] = '0;
      end else if (w[31:3] == {29{w[3]}}) begin
        pre[i] = 3'b001; len[i] = 6'd4;  fld[i] = 32'(w[3:0]);
      end else if (w[31:7] == {25{w[7]}}) begin
        pre[i] = 3'b010; len[i] = 6'd8;  fld[i] = 32'(w[7:0]);
      end else if (w == {4{w[7:0]}}) begin
        pre[i] = 3'b110; len[i] = 6'd8;  fld[i] = 32'(w[7:0]);
      end else if (w[31:15] == {17{w[15]}}) begin
        pre[i] = 3'b011; len[i] = 6'd16; fld[i] = 32'(w[15:0]);
      end else if (w[15:0] == 16'h0) begin
        pre[i] = 3'b100; len[i] = 6'd16; fld[i] = 32'(w[31:16]);
      end else if (w[31:23] == {9{w[23]}} && w[15:7] == {9{w[7]}}) begin
        pre[i] = 3'b101; len[i] = 6'd16; fld[i] = 32'({w[23:16], w[7:0]});
      end else begin
        pre[i] = 3'b111; len[i] = 6'd32; fld[i] = w;
      end
    end
  end

  always_comb begin
    logic [9:0] off;
    logic [PAYLOAD_W+31:0] acc;
    acc = '0;
    for (int i = 0; i < NW; i++) acc[3*i +: 3] = pre[i];
    off = 10'd48;
    for (int i = 0; i < NW; i++) begin
      if (off < 10'(PAYLOAD_W))
        acc = acc | ((PAYLOAD_W+32)'(fld[i]) << off);
      off = off + 10'(len[i]);
    end
    bits    = off;
    payload = acc[PAYLOAD_W-1:0];
    if (off <= 10'd120)      size = SZ_16;
    else if (off <= 10'd256) size = SZ_32;
    else if (off <= 10'd384) size = SZ_48;
    else                     size = SZ_64;
  end

endmodule
