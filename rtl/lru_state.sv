// lru_state: least-recently-used replacement state of the L1, one per set.
//
// Each way of a set has a 2-bit age; the four ages of a set are always a
// permutation of 0..3 (0 = most recently used). Reset gives way w the age w.
// `touch_valid` makes `touch_way` of `touch_set` the most recent: ways younger
// than it age by one. `swap_valid` exchanges the ages of way W0 and
// `swap_way` in `swap_set`, so that the replacement order follows the lines
// when HoLiSwap moves them; the cache's miss behaviour is then the same as
// without migration. `lru_way` is the oldest way of `rd_set` (combinational).
// A touch and a swap must not arrive in the same cycle.
//
// The paper does not give the replacement policy; it states that migration
// leaves the miss rate unchanged, which this state-follows-the-line LRU
// keeps. LRU itself is this design's choice.
module lru_state
  import holiswap_pkg::*;
#(
  parameter int unsigned SETS = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    touch_valid,
  input  logic [$clog2(SETS)-1:0] touch_set,
  input  logic [WAY_W-1:0]        touch_way,
  input  logic                    swap_valid,
  input  logic [$clog2(SETS)-1:0] swap_set,
  input  logic [WAY_W-1:0]        swap_way,
  input  logic [$clog2(SETS)-1:0] rd_set,
  output logic [WAY_W-1:0]        lru_way
);
  logic [WAY_W-1:0] age [SETS][WAYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) age[s][w] <= WAY_W'(w);
    end else if (touch_valid) begin
      for (int w = 0; w < WAYS; w++)
        if (age[touch_set][w] < age[touch_set][touch_way]) age[touch_set][w] <= age[touch_set][w] + 1'b1;
      age[touch_set][touch_way] <= '0;
    end else if (swap_valid) begin
      age[swap_set][0]        <= age[swap_set][swap_way];
      age[swap_set][swap_way] <= age[swap_set][0];
    end
  end

  always_comb begin
    lru_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (age[rd_set][w] == WAY_W'(WAYS - 1)) lru_way = WAY_W'(w);
  end
endmodule
