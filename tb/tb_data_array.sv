// tb_data_array: writes random 64-byte lines into a 16-set, 8-way data array
// and reads them back against a model, one cycle after rd_en, with random
// writes to other or the same addresses in the read cycle (old data returned).
module tb_data_array;
  import touche_pkg::*;
  localparam int N = 16 * 8;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [6:0] rd_addr = 0, wr_addr = 0;
  logic [LINE_W-1:0] rd_data, wr_data, model [N];
  always #5 clk = ~clk;
  data_array #(.SETS(16), .WAYS(8)) dut (.clk, .rd_en, .rd_addr, .rd_data,
                                         .wr_en, .wr_addr, .wr_data);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = $urandom;
    return l;
  endfunction
  initial begin
    wr_data = '0;
    for (int a = 0; a < N; a++) begin
      @(negedge clk) wr_en = 1; wr_addr = 7'(a); wr_data = rnd_line(); model[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 400; n++) begin
      logic [LINE_W-1:0] exp;
      int a;
      a = $urandom % N;
      @(negedge clk);
      rd_en = 1; rd_addr = 7'(a); exp = model[a];
      wr_en = $urandom % 2; wr_addr = (n % 5 == 0) ? 7'(a) : 7'($urandom % N);
      wr_data = rnd_line();
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      check(rd_data == exp, $sformatf("line %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
