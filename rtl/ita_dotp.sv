// ita_dotp: the N dot product units of the ITA engine.
//
// Unit n computes <a, b_n> = sum_k a[k] * b_n[k] over the M signed 8-bit
// elements of the shared input vector `a_i` and its own weight row
// `b_i[n]`, giving a signed D-bit result. All N units see the same input
// vector, so one input vector per cycle yields N outputs of one output row.
// Purely combinational; the engine registers the results. Structure (N
// units, vector length M, D-bit result) follows the paper.
module ita_dotp
  import ita_pkg::*;
#(
  parameter int unsigned NU = N,
  parameter int unsigned VL = M,
  parameter int unsigned DW = D
) (
  input  logic [VL-1:0][7:0]          a_i,
  input  logic [NU-1:0][VL-1:0][7:0]  b_i,
  output logic [NU-1:0][DW-1:0]       res_o
);
  for (genvar n = 0; n < NU; n++) begin : g_unit
    always_comb begin
      logic signed [DW-1:0] acc;
      acc = '0;
      for (int k = 0; k < VL; k++)
        acc += DW'($signed(a_i[k]) * $signed(b_i[n][k]));
      res_o[n] = acc;
    end
  end
endmodule
