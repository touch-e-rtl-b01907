// tb_decompress_engine: builds FPC payloads by hand (sixteen 3-bit prefixes,
// then the data fields packed in word order from bit 48) from random pattern
// choices, and BDI B8D1 payloads (8-byte base, seven 1-byte deltas), and
// checks that the engine rebuilds each word or element from the code it is
// given.
module tb_decompress_engine;
  import touche_pkg::*;
  import fpc_tb_pkg::*;
  comp_t comp;
  logic [CPAY_W-1:0] payload;
  logic [LINE_W-1:0] data;
  decompress_engine dut (.comp, .payload, .data);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [31:0] field(logic [2:0] p, logic [31:0] w);
    case (p)
      3'b001: return 32'(w[3:0]);
      3'b010, 3'b110: return 32'(w[7:0]);
      3'b011: return 32'(w[15:0]);
      3'b100: return 32'(w[31:16]);
      3'b101: return 32'({w[23:16], w[7:0]});
      3'b111: return w;
      default: return 0;
    endcase
  endfunction
  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [2:0]  pre [16];
      logic [31:0] wd  [16];
      int pos;
      payload = '0;
      pos = 48;
      for (int i = 0; i < 16; i++) begin
        pre[i] = 3'($urandom);
        // keep the payload within the 256 bits that are ever stored
        if (pos + fpc_len(pre[i]) > 256) pre[i] = 3'b000;
        wd[i] = fpc_word(pre[i]);
        for (int b = 0; b < 3; b++) payload[3*i + b] = pre[i][b];
        for (int b = 0; b < fpc_len(pre[i]); b++) payload[pos + b] = field(pre[i], wd[i])[b];
        pos += fpc_len(pre[i]);
      end
      comp = (pos <= 120) ? C_FPC16 : C_FPC32; #1;
      for (int i = 0; i < 16; i++)
        check(data[32*i +: 32] == wd[i], $sformatf("FPC word %0d pattern %b", i, pre[i]));
    end
    for (int n = 0; n < 200; n++) begin
      longint unsigned base;
      logic [7:0] dl [8];
      base = {$urandom, $urandom};
      payload = '0; payload[63:0] = base;
      for (int k = 1; k < 8; k++) begin dl[k] = 8'($urandom); payload[64 + 8*(k-1) +: 8] = dl[k]; end
      comp = C_B8D1; #1;
      check(data[63:0] == base, "BDI base");
      for (int k = 1; k < 8; k++)
        check(data[64*k +: 64] == base + 64'($signed(dl[k])), "BDI element");
    end
    comp = C_ZEROS; payload = {8{$urandom}}; #1 check(data == '0, "zero block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
