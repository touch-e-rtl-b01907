// latency_monitor: the "Dynamic Touche" switch.
//
// The paper lets compression be used only while it pays: the controller
// watches the average memory latency seen by requests and turns compression on
// only when that average is above 100x the signature-collision overhead of
// 1.4 cycles, i.e. above 140 cycles. How the average is taken is not given.
// Here each completed read reports its latency (request accepted to data
// returned) on `sample_valid`/`sample_lat`; after 2**WINDOW_LOG2 samples the
// sum is shifted down to the window mean, `enable` is set to
// (mean > THRESHOLD) one cycle later, and the sums restart. `switched` pulses
// when `enable` changes. `enable` starts at INIT_ENABLE.
module latency_monitor #(
  parameter int unsigned WINDOW_LOG2 = 10,
  parameter int unsigned THRESHOLD   = 140,
  parameter bit          INIT_ENABLE = 1'b1,
  parameter int unsigned LAT_W       = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sample_valid,
  input  logic [LAT_W-1:0] sample_lat,
  output logic             enable,
  output logic             switched,
  output logic [LAT_W-1:0] last_mean
);

  logic [LAT_W+WINDOW_LOG2-1:0] sum, sum_next;
  logic [WINDOW_LOG2:0]         cnt;
  logic [LAT_W-1:0]             mean;
  logic                         en_next;

  assign sum_next = sum + (LAT_W+WINDOW_LOG2)'(sample_lat);
  assign mean     = LAT_W'(sum_next >> WINDOW_LOG2);
  assign en_next  = (32'(mean) > THRESHOLD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum       <= '0;
      cnt       <= '0;
      enable    <= INIT_ENABLE;
      switched  <= 1'b0;
      last_mean <= '0;
    end else begin
      switched <= 1'b0;
      if (sample_valid) begin
        if (cnt == (WINDOW_LOG2+1)'((1 << WINDOW_LOG2) - 1)) begin
          sum       <= '0;
          cnt       <= '0;
          last_mean <= mean;
          enable    <= en_next;
          switched  <= (en_next != enable);
        end else begin
          sum <= sum_next;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
