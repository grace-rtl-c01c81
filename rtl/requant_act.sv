// requant_act: converts one 32-bit convolution sum to the int8 output
// format and applies the layer's activation.
//
// Requantisation uses the per-output-channel parameters (rq_t): multiply
// by a 16-bit multiplier, shift right with rounding, add the output zero
// point, saturate to int8. This realises the scale/zero-point mapping of
// per-channel static quantisation with integer arithmetic only. ReLU then
// clamps at the zero point; Sigmoid reads the requantised value as Q3.4 and
// returns a piecewise-linear sigmoid in Q0.7. Purely combinational. The
// paper names the ReLU/Sigmoid activation and per-channel static int8
// quantisation; the integer formulas are this design's choice.
module requant_act
  import grace_pkg::*;
(
  input  logic signed [31:0] acc,
  input  rq_t                rq,
  output logic signed [7:0]  y
);
  logic signed [7:0] q;
  always_comb begin
    q = requant(acc, rq.mult, rq.shift, rq.zero);
    unique case (rq.act)
      ACT_RELU:    y = (q < rq.zero) ? rq.zero : q;
      ACT_SIGMOID: y = sigmoid_q(q);
      default:     y = q;
    endcase
  end
endmodule
