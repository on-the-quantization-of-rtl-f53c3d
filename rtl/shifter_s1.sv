// shifter_s1: multiplier-free product of a datum and a quantized template
// coefficient (shifter S1 of the 2D convolution unit).
//
// The coefficient is 0 or +-2^p with QK <= p <= QM. The datum is shifted left
// by e = p - QK and negated for a negative coefficient; because the result is
// read with XFRAC = FRAC - QK fraction bits, this equals d * 2^p exactly, with
// no bits lost for negative p. A zero coefficient gives 0.
//
// Interface: d (IW bits, signed) and c are sampled when en is high; p holds
// the registered product one cycle later (latency 1, throughput 1/cycle).
// The power-of-two shifter replacing the multiplier follows the paper; the
// coefficient code, the exact wide output and the output register are this
// design's choices.
module shifter_s1
  import cenn_pkg::*;
#(
  parameter int IW = GW,
  parameter int OW = GW + QM - QK
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic signed [IW-1:0] d,
  input  qcoef_t               c,
  output logic signed [OW-1:0] p
);

  logic signed [OW-1:0] dw, sh, prod;

  always_comb begin
    dw   = OW'(d);
    sh   = dw <<< c.e;
    prod = !c.nz ? '0 : (c.sgn ? -sh : sh);
  end

  always_ff @(posedge clk) begin
    if (en) p <= prod;
  end

endmodule
