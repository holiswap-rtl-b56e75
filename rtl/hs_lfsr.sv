// hs_lfsr: free-running 16-bit Galois LFSR (taps 0xB400, maximal length).
//
// It supplies the random bits that decide the probabilistic increments of the
// logarithmic counters and the victim way of a refill. The paper says only
// that a counter exponent advances "with probability 1/2^e"; the random
// source is this design's choice. A new word is produced every cycle in which
// `step` is high. Reset loads a non-zero seed.
module hs_lfsr #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [15:0] rnd
);
  logic [15:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state <= (SEED == 16'h0) ? 16'h1 : SEED;
    else if (step)
      state <= state[0] ? ((state >> 1) ^ 16'hB400) : (state >> 1);
  end

  assign rnd = state;
endmodule
