// shifter_s2: multiplication by the Euler step dt = 2^s, -7 <= s <= 0
// (shifter S2 of the stage).
//
// An arithmetic right shift by dt_shift = -s. It works on the wide sum
// (XFRAC fraction bits), so for the usual dt values no bit of the sum is
// lost here; dt_shift = 0 (dt = 1) turns the stage into a discrete-time CeNN.
//
// Interface: d and dt_shift are sampled when en is high, q holds d * 2^s one
// cycle later. The range of s follows the paper; the output register and the
// floor behaviour of the shift are this design's choices.
module shifter_s2
  import cenn_pkg::*;
#(
  parameter int W = SW
) (
  input  logic                clk,
  input  logic                en,
  input  logic signed [W-1:0] d,
  input  logic [2:0]          dt_shift,
  output logic signed [W-1:0] q
);

  always_ff @(posedge clk) begin
    if (en) q <= d >>> dt_shift;
  end

endmodule
