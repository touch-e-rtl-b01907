// tb_tag_array: writes random set rows into a 64-set, 8-way tag array and
// reads them back against a model. A read returns the row one cycle after
// rd_en; a write and a read of the same set in one cycle return the old row.
module tb_tag_array;
  import touche_pkg::*;
  localparam int SETS = 64;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [5:0] rd_set = 0, wr_set = 0;
  tag_entry_t [7:0] rd_data, wr_data, model [SETS];
  always #5 clk = ~clk;
  tag_array #(.SETS(SETS), .WAYS(8)) dut (.clk, .rd_en, .rd_set, .rd_data,
                                          .wr_en, .wr_set, .wr_data);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic tag_entry_t [7:0] rnd_row();
    tag_entry_t [7:0] r;
    for (int w = 0; w < 8; w++) r[w] = {$urandom, 2'($urandom)};
    return r;
  endfunction
  initial begin
    wr_data = '0;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk) wr_en = 1; wr_set = 6'(s); wr_data = rnd_row(); model[s] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 400; n++) begin
      tag_entry_t [7:0] exp;
      int s;
      s = $urandom % SETS;
      @(negedge clk);
      rd_en = 1; rd_set = 6'(s); exp = model[s];
      wr_en = $urandom % 2; wr_set = 6'($urandom % SETS); wr_data = rnd_row();
      if (wr_en) model[wr_set] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      check(rd_data == exp, $sformatf("row of set %0d", s));
      // the output holds while rd_en is low
      @(negedge clk) check(rd_data == exp, "read data holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
