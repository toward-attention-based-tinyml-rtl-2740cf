// ita_accumulator: accumulator and requantiser of the ITA engine,
// Req(x + bias + sum).
//
// For each of the N lanes: acc = dot + (add_bias ? sign-extended 24-bit
// bias : 0) + (add_psum ? partial sum : 0), in D-bit two's complement. The
// accumulated value goes back to the partial sum buffer when more K-tiles
// follow; on the last K-tile it is requantised to int8 with
// clip((acc * mult + 2^(shift-1)) >> shift, -128, 127). Combinational. The
// Req(x + bias + sum) structure, 24-bit bias and D-bit sums follow the paper;
// the multiply-shift form of the requantiser is this design's assumption.
module ita_accumulator
  import ita_pkg::*;
#(
  parameter int unsigned NU = N
) (
  input  logic [NU-1:0][D-1:0]      dot_i,
  input  logic [NU-1:0][BIAS_W-1:0] bias_i,
  input  logic [NU-1:0][D-1:0]      psum_i,
  input  logic                      add_bias_i,
  input  logic                      add_psum_i,
  input  requant_t                  rq_i,
  output logic [NU-1:0][D-1:0]      acc_o,
  output logic [NU-1:0][7:0]        q_o
);
  always_comb begin
    for (int n = 0; n < NU; n++) begin
      logic signed [D-1:0] a;
      a = $signed(dot_i[n]);
      if (add_bias_i) a += D'($signed(bias_i[n]));
      if (add_psum_i) a += $signed(psum_i[n]);
      acc_o[n] = a;
      q_o[n]   = requant(a, rq_i);
    end
  end
endmodule
