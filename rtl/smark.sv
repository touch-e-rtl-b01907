// smark: the superblock marker (SMARK) of the tag manager.
//
// At boot a 16-bit marker is drawn and kept for as long as the system runs;
// the paper asks for a random marker. A 16-bit Galois LFSR (taps 16,14,13,11)
// is seeded from `seed` when `boot` is pulsed, stepped BOOT_STEPS times, and
// its state is latched as the marker; `ready` rises then. Stepping the LFSR
// is this design's choice of "random": the real entropy comes in on `seed`.
//
// The module also compares the marker with the marker field tag[26:11] of
// every way of a set, combinationally, so the tag manager knows which
// compressed lines may hold a superblock (Fig. 15 and the access flowchart).
module smark
  import touche_pkg::*;
#(
  parameter int unsigned WAYS       = 8,
  parameter int unsigned BOOT_STEPS = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    boot,
  input  logic [31:0]             seed,
  input  logic [WAYS-1:0][TAG_W-1:0] way_tag,   // tag field of each way
  output logic [MARK_W-1:0]       marker,
  output logic                    ready,
  output logic [WAYS-1:0]         mark_match
);

  logic [15:0] lfsr;
  logic [$clog2(BOOT_STEPS+1)-1:0] steps;
  logic running;

  function automatic logic [15:0] lfsr_next(logic [15:0] s);
    return s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr    <= 16'hACE1;
      steps   <= '0;
      running <= 1'b0;
      ready   <= 1'b0;
      marker  <= '0;
    end else if (boot) begin
      // a zero state would lock the LFSR, so fold in a constant
      lfsr    <= (seed[31:16] ^ seed[15:0]) | 16'h0001;
      steps   <= '0;
      running <= 1'b1;
      ready   <= 1'b0;
    end else if (running) begin
      if (steps == ($bits(steps))'(BOOT_STEPS)) begin
        marker  <= lfsr;
        ready   <= 1'b1;
        running <= 1'b0;
      end else begin
        lfsr  <= lfsr_next(lfsr);
        steps <= steps + 1'b1;
      end
    end
  end

  always_comb
    for (int w = 0; w < WAYS; w++)
      mark_match[w] = (way_tag[w][MARK_LSB +: MARK_W] == marker);

endmodule
