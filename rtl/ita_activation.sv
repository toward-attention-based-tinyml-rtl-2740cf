// ita_activation: activation unit of the ITA engine (Identity, ReLU, GeLU).
//
// Works on the N requantised int8 outputs of one cycle. Identity passes them,
// ReLU clamps negatives to zero, and GeLU uses the integer-only i-GeLU
// polynomial of I-BERT:
//   L   = sgn(q) * (c - (min(|q|, -b) + b)^2)        (D-bit)
//   out = q * (L + one)
//   y   = clip((out * mult + 2^(shift-1)) >> shift, -128, 127)
// with b = floor(-1.769 / S), c = floor(-1 / (a S^2)), a = -0.2888,
// one = c, S being the scale of x / sqrt(2); software computes them and
// writes them with the task. This is I-BERT's polynomial with the sign of
// the erf scale a*S^2 folded into c, so that every scale is positive and
// the unsigned requantiser can be used (I-BERT's own q_c and q_1 are
// negative). Combinational. The three modes, i-GeLU and its
// D-bit evaluation followed by 8-bit quantisation follow the paper; applying
// it to the already requantised 8-bit value (as the ITA figure's 8-bit
// input suggests) and the output requantiser are this design's reading.
module ita_activation
  import ita_pkg::*;
#(
  parameter int unsigned NU = N
) (
  input  logic [NU-1:0][7:0]   q_i,
  input  ita_act_e             mode_i,
  input  logic signed [7:0]    gelu_b_i,
  input  logic signed [D-1:0]  gelu_c_i,
  input  logic signed [D-1:0]  gelu_one_i,
  input  requant_t             rq_i,
  output logic [NU-1:0][7:0]   y_o
);
  always_comb begin
    for (int n = 0; n < NU; n++) begin
      logic signed [8:0]   q, absq, lim, t;
      logic signed [D-1:0] l;
      logic signed [RQ_IN_W-1:0] prod;
      q    = 9'($signed(q_i[n]));
      absq = (q < 0) ? -q : q;
      lim  = -9'(gelu_b_i);
      t    = ((absq < lim) ? absq : lim) + 9'(gelu_b_i);
      l    = gelu_c_i - D'(t * t);
      if (q < 0) l = -l;
      prod = RQ_IN_W'(q) * RQ_IN_W'(l + gelu_one_i);
      unique case (mode_i)
        ACT_RELU: y_o[n] = (q < 0) ? 8'd0 : q_i[n];
        ACT_GELU: y_o[n] = requant_wide(prod, rq_i);
        default:  y_o[n] = q_i[n];
      endcase
    end
  end
endmodule
