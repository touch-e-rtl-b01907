// lru_repl: replacement logic over the 3 replacement bits of each tag entry.
//
// The paper keeps replacement bits per cacheline only (not per compressed
// block) and uses LRU in its main configuration; on replacement it picks the
// victim line by these bits and evicts a random block inside it. With 8 ways
// and 3 bits per way, the bits hold each way's exact LRU age (0 = most
// recent, 7 = least recent), which is this design's encoding.
//
// `touch` moves way `way` to age 0 and ages every way that was younger by
// one. `victim` is the way with the largest age (lowest index on ties, which
// only occur before the ages are a permutation). Combinational.
module lru_repl
  import touche_pkg::*;
#(
  parameter int unsigned WAYS = 8
) (
  input  logic [WAYS-1:0][REPL_W-1:0] age_in,
  input  logic [$clog2(WAYS)-1:0]     way,
  output logic [WAYS-1:0][REPL_W-1:0] age_out,   // after touching `way`
  output logic [$clog2(WAYS)-1:0]     victim
);

  always_comb begin
    logic [REPL_W-1:0] best;
    for (int w = 0; w < WAYS; w++) begin
      if (w == int'(way))                 age_out[w] = '0;
      else if (age_in[w] < age_in[way])   age_out[w] = age_in[w] + 1'b1;
      else                                age_out[w] = age_in[w];
    end
    victim = '0;
    best   = age_in[0];
    for (int w = 1; w < WAYS; w++)
      if (age_in[w] > best) begin
        best   = age_in[w];
        victim = ($clog2(WAYS))'(w);
      end
  end

endmodule
