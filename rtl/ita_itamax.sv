// ita_itamax: ITAMax, the streaming integer softmax of the ITA engine.
//
// Softmax is evaluated in base 2 on int8 scores: one "octave" is 2^SH input
// LSBs, so e(x) = 2^EXP_LOG >> ((max - x) >> SH). It runs in three stages
// that hide inside the two matrix products of an attention head:
//
//  DA  (denominator accumulation) while Q x K^T is computed. Each cycle the
//      engine hands over N requantised scores of one row (`da_row_i`). The
//      stage finds their maximum, compares it with the row's buffered
//      maximum, rescales the buffered sum by the change of the maximum if it
//      grew, and adds the N new terms. `clear_i` starts a new block of M rows.
//  DI  (denominator inversion) after the last column tile of a row block:
//      `di_start_i` replaces, over M cycles (one row per cycle, `di_busy_o`),
//      every row's sum with INV_NUM / sum in the same buffer.
//  EN  (element normalisation) while A x V is computed: combinational,
//      turns a row of M stored scores into probabilities
//      A = min(127, (inv >> ((max - x) >> SH)) >> INV_SH), i.e. softmax x 128.
//
// Buffers: M x 8-bit maxima and M x SUM_W-bit sums, as in the paper's
// figure (M x 8 and M x 19). The three stages, their order and the buffer
// shapes follow the paper; the exponent base, the shifts, the constants and
// the single-divider DI are this design's choices.
module ita_itamax
  import ita_pkg::*;
#(
  parameter int unsigned NU      = N,
  parameter int unsigned VL      = M,
  parameter int unsigned SW      = SUM_W,
  parameter int unsigned SH      = 5,    // input LSBs per halving
  parameter int unsigned EXP_LOG = 9,    // e(max) = 2^9
  parameter int unsigned INV_LOG = 24,   // inverse numerator 2^24
  parameter int unsigned INV_SH  = 8     // output shift after inversion
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        clear_i,
  // DA
  input  logic                        da_valid_i,
  input  logic [$clog2(VL)-1:0]       da_row_i,
  input  logic [NU-1:0][7:0]          da_x_i,
  // DI
  input  logic                        di_start_i,
  output logic                        di_busy_o,
  // EN
  input  logic [$clog2(VL)-1:0]       en_row_i,
  input  logic [VL-1:0][7:0]          en_x_i,
  output logic [VL-1:0][7:0]          en_y_o
);
  localparam int unsigned RW = $clog2(VL);

  logic signed [7:0] max_q [VL];
  logic [SW-1:0]     sum_q [VL];
  logic [VL-1:0]     seen_q;
  logic              di_q;
  logic [RW-1:0]     di_row_q;

  // ---------------- DA ----------------
  logic signed [7:0] loc_max, new_max;
  logic [SW:0]       new_sum;

  function automatic logic [3:0] octaves(input logic signed [7:0] mx,
                                         input logic signed [7:0] x);
    logic signed [9:0] d;
    d = 10'(mx) - 10'(x);
    if (d < 0) return 4'd0;
    return 4'(d >>> SH);
  endfunction

  always_comb begin
    logic [SW+6:0] s;
    loc_max = $signed(da_x_i[0]);
    for (int j = 1; j < NU; j++)
      if ($signed(da_x_i[j]) > loc_max) loc_max = $signed(da_x_i[j]);
    new_max = (seen_q[da_row_i] && max_q[da_row_i] > loc_max) ? max_q[da_row_i] : loc_max;
    s = '0;
    if (seen_q[da_row_i])
      s = (SW+7)'(sum_q[da_row_i] >> octaves(new_max, max_q[da_row_i]));
    for (int j = 0; j < NU; j++)
      s += (SW+7)'((1 << EXP_LOG) >> octaves(new_max, $signed(da_x_i[j])));
    new_sum = (s > (SW+7)'({SW{1'b1}})) ? {1'b0, {SW{1'b1}}} : (SW+1)'(s);
  end

  // ---------------- DI ----------------
  logic [SW-1:0] inv;
  always_comb begin
    logic [INV_LOG:0] q;
    q   = (sum_q[di_row_q] == '0) ? (INV_LOG+1)'({SW{1'b1}})
                                  : (INV_LOG+1)'((1 << INV_LOG) / sum_q[di_row_q]);
    inv = (q > (INV_LOG+1)'({SW{1'b1}})) ? {SW{1'b1}} : SW'(q);
  end
  assign di_busy_o = di_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      seen_q   <= '0;
      di_q     <= 1'b0;
      di_row_q <= '0;
    end else begin
      if (clear_i) seen_q <= '0;
      else if (da_valid_i) seen_q[da_row_i] <= 1'b1;
      if (di_start_i) begin
        di_q     <= 1'b1;
        di_row_q <= '0;
      end else if (di_q) begin
        di_row_q <= di_row_q + 1'b1;
        if (int'(di_row_q) == VL - 1) di_q <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (da_valid_i) begin
      max_q[da_row_i] <= new_max;
      sum_q[da_row_i] <= new_sum[SW-1:0];
    end else if (di_q) begin
      sum_q[di_row_q] <= inv;
    end
  end

  // ---------------- EN ----------------
  always_comb begin
    for (int k = 0; k < VL; k++) begin
      logic [SW-1:0] v;
      v = (sum_q[en_row_i] >> octaves(max_q[en_row_i], $signed(en_x_i[k]))) >> INV_SH;
      en_y_o[k] = (v > 127) ? 8'd127 : v[7:0];
    end
  end

  a_no_da_during_di: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(da_valid_i && di_q));
endmodule
