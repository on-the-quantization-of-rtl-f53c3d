// cenn_output_fn: the CeNN output nonlinearity y = 0.5 * (|x+1| - |x-1|).
//
// The piecewise-linear function is the identity on [-1, 1] and saturates at
// -1 and +1 outside, so in hardware it is a two-sided clamp. +1.0 is ONE in
// the Q5.12 format of cenn_pkg. Purely combinational.
module cenn_output_fn
  import cenn_pkg::*;
(
  input  data_t x,
  output data_t y
);

  always_comb begin
    if (x > ONE)       y = ONE;
    else if (x < -ONE) y = -ONE;
    else               y = x;
  end

endmodule
