// fpc_tb_pkg: helpers shared by the FPC testbenches. fpc_word makes a
// 32-bit word that matches FPC pattern p (its prefix code) and none of the
// patterns tried before it; fpc_len gives the data-field length of a pattern.
package fpc_tb_pkg;
function automatic logic [31:0] fpc_word(input logic [2:0] p);
  logic [31:0] w;
  logic [7:0] a, b;
  case (p)
    3'b000: w = '0;
    3'b001: begin w = 32'($signed(4'($urandom))); if (w == 0) w = 32'd5; end
    3'b010: begin a = 8'($urandom); if (a < 8'h08 || a > 8'hF7) a = 8'h55; w = 32'($signed(a)); end
    3'b110: begin a = 8'($urandom); if (a == 8'h00 || a == 8'hFF) a = 8'h3C; w = {4{a}}; end
    3'b011: begin w = 32'($signed(16'($urandom | 32'h0100))); if (w[15:8] == 8'h00 || w[15:8] == 8'hFF) w = 32'h0000_1234; end
    3'b100: begin w = {16'($urandom | 32'h1), 16'h0}; end
    3'b101: begin
      a = 8'($urandom); b = 8'($urandom);
      if (a == 8'h00 || a == 8'hFF) a = 8'h12;
      if (b == 8'h00) b = 8'h81;
      w = {{8{a[7]}}, a, {8{b[7]}}, b};
    end
    default: begin
      w = $urandom; w[31] = 1'b0; w[30] = 1'b1; w[0] = 1'b1;
      if (w == {4{w[7:0]}}) w[8] = ~w[8];
    end
  endcase
  return w;
endfunction

function automatic int fpc_len(input logic [2:0] p);
  case (p)
    3'b000: return 0;
    3'b001: return 4;
    3'b010, 3'b110: return 8;
    3'b111: return 32;
    default: return 16;
  endcase
endfunction
endpackage
