// tb_lru_repl: drives random touches of an 8-way set and compares the ages
// and the victim with a reference list kept in most-recent-first order.
module tb_lru_repl;
  import touche_pkg::*;
  logic [7:0][2:0] age_in, age_out;
  logic [2:0] way, victim;
  lru_repl #(.WAYS(8)) dut (.age_in, .way, .age_out, .victim);
  int checks = 0, failures = 0;
  int order [8];   // order[0] = most recent way
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    for (int w = 0; w < 8; w++) begin age_in[w] = 3'(w); order[w] = w; end
    way = 0;
    for (int n = 0; n < 500; n++) begin
      int t, p;
      #1 check(int'(victim) == order[7], $sformatf("victim %0d expected %0d", victim, order[7]));
      t = $urandom % 8;
      way = 3'(t); #1;
      p = 0;
      for (int i = 0; i < 8; i++) if (order[i] == t) p = i;
      for (int i = p; i > 0; i--) order[i] = order[i-1];
      order[0] = t;
      for (int i = 0; i < 8; i++)
        check(int'(age_out[order[i]]) == i, $sformatf("age of way %0d", order[i]));
      age_in = age_out;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
