// tb_latency_monitor: feeds windows of latency samples (WINDOW_LOG2=3, so 8
// per window) and checks that compression is enabled only when the window
// mean is above 140 cycles, that the decision appears right after the last
// sample of a window, and that `switched` pulses on every change.
module tb_latency_monitor;
  logic clk = 0, rst_n = 0, sv = 0, en, sw;
  logic [15:0] lat, mean;
  always #5 clk = ~clk;
  latency_monitor #(.WINDOW_LOG2(3), .THRESHOLD(140)) dut (
    .clk, .rst_n, .sample_valid(sv), .sample_lat(lat), .enable(en),
    .switched(sw), .last_mean(mean));
  int checks = 0, failures = 0, switches = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) if (sw) switches++;
  bit prev_en;
  task automatic window(input int a, input int b);  // 4 samples of a, 4 of b
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); sv = 1; lat = 16'(i < 4 ? a : b);
      @(negedge clk); sv = 0;
      if (i < 7) check(en == prev_en, "no change inside a window");
    end
  endtask
  initial begin
    lat = 0;
    #12 rst_n = 1;
    check(en, "enabled after reset");
    prev_en = en; window(35, 35);          check(!en && mean == 35, "mean 35: off");
    prev_en = en; window(100, 181);        check(!en && mean == 140, "mean 140.5 truncates to 140: stays off");
    prev_en = en; window(141, 141);        check(en && mean == 141, "mean 141: on");
    prev_en = en; window(140, 140);        check(!en && mean == 140, "mean 140: off");
    prev_en = en; window(541, 35);         check(en && mean == 288, "mean 288: on");
    check(switches == 4, $sformatf("switch pulses %0d", switches));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
