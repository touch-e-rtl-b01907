// fpc_decompressor: rebuilds a 64-byte block from an FPC payload (layout and
// patterns as in fpc_compressor). The sixteen 3-bit prefixes at the bottom of
// the payload give each word's data length; a running sum of those lengths
// locates each word's field, which is then expanded by its pattern. Only
// payloads of up to 256 bits are ever stored, so that is all it reads.
// Purely combinational.
module fpc_decompressor
  import touche_pkg::*;
(
  input  logic [PAYLOAD_W-1:0] payload,
  output logic [LINE_W-1:0]    data
);

  localparam int unsigned NW = LINE_W / 32;

  always_comb begin
    logic [9:0]  off;
    logic [2:0]  p;
    logic [31:0] f, w;
    data = '0;
    off  = 10'd48;
    for (int i = 0; i < NW; i++) begin
      p = payload[3*i +: 3];
      f = (off < 10'(PAYLOAD_W)) ? 32'(payload >> off) : 32'd0;
      case (p)
        3'b000: begin w = '0;                                      end
        3'b001: begin w = {{28{f[3]}}, f[3:0]};    off += 10'd4;   end
        3'b010: begin w = {{24{f[7]}}, f[7:0]};    off += 10'd8;   end
        3'b110: begin w = {4{f[7:0]}};             off += 10'd8;   end
        3'b011: begin w = {{16{f[15]}}, f[15:0]};  off += 10'd16;  end
        3'b100: begin w = {f[15:0], 16'h0};        off += 10'd16;  end
        3'b101: begin w = {{8{f[15]}}, f[15:8], {8{f[7]}}, f[7:0]}; off += 10'd16; end
        default: begin w = f;                      off += 10'd32;  end
      endcase
      data[32*i +: 32] = w;
    end
  end

endmodule
