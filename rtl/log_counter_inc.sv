// log_counter_inc: next value of a 4-bit logarithmic (exponent-only) counter.
//
// The counter holds a code, not a count: code 0 is a count of zero and code
// k >= 1 a count of 2^(k-1) (see holiswap_pkg). An increment takes code 0 to
// 1 with certainty; from code k >= 1 (count 2^e, e = k-1) it advances to k+1
// with probability 1/2^e, so the expected count grows by one per event. The
// coin is fair: the advance happens when the low e bits of `rnd` are all zero.
// The code saturates at its maximum (15). Purely combinational.
//
// From the paper: the exponent-only storage and the 1/2^e increment rule.
// This design's choice: the zero code, the saturation and the random source.
module log_counter_inc
  import holiswap_pkg::*;
(
  input  logic [CNT_W-1:0]  code,
  input  logic              inc,    // an event to count
  input  logic [RAND_W-1:0] rnd,    // random bits, fresh for this event
  output logic [CNT_W-1:0]  next
);
  logic [RAND_W-1:0] mask;
  logic              advance;

  always_comb begin
    // mask selects the low e = code-1 bits of rnd (all of them for e >= RAND_W)
    if (code == '0)
      mask = '0;
    else if (int'(code) - 1 >= RAND_W)
      mask = '1;
    else
      mask = RAND_W'((32'd1 << (code - 1)) - 1);
    advance = inc && ((rnd & mask) == '0) && (code != '1);
    next    = advance ? code + 1'b1 : code;
  end
endmodule
