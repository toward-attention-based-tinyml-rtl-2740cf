// ita_weight_buffer: double-buffered weight memory of the ITA engine.
//
// Two banks, each holding N weight rows of M int8 values (one row per dot
// product unit). The write side fills the banks alternately, one M-byte row
// per accepted beat of the weight stream (`wr_valid_i`/`wr_ready_o`); a bank
// becomes readable once its N-th row is written. The read side always
// exposes the bank of the current weight group as N x M values and
// `rd_valid_o`; `rd_release_i` frees that bank after its last use and moves
// to the other bank. So the next set of weights is loaded while the current
// set is used, and weight loading is only visible when the stream is slower
// than one row per N computed outputs. Double buffering and the N x (M x 8)
// bank shape follow the paper's ITA figure; the fill/release protocol is
// this design's own choice.
module ita_weight_buffer
  import ita_pkg::*;
#(
  parameter int unsigned NU = N,
  parameter int unsigned VL = M
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  input  logic                               clear_i,
  input  logic                               wr_valid_i,
  output logic                               wr_ready_o,
  input  logic [VL-1:0][7:0]                 wr_data_i,
  output logic                               rd_valid_o,
  input  logic                               rd_release_i,
  output logic [NU-1:0][VL-1:0][7:0]         rd_data_o
);
  localparam int unsigned RW = (NU > 1) ? $clog2(NU) : 1;

  logic [1:0][NU-1:0][VL-1:0][7:0] mem_q;
  logic [1:0]    full_q;
  logic          wr_bank_q, rd_bank_q;
  logic [RW-1:0] wr_row_q;
  logic          wr_fire;

  assign wr_ready_o = !full_q[wr_bank_q];
  assign wr_fire    = wr_valid_i && wr_ready_o;
  assign rd_valid_o = full_q[rd_bank_q];
  assign rd_data_o  = mem_q[rd_bank_q];

  always_ff @(posedge clk_i) begin
    if (wr_fire) mem_q[wr_bank_q][wr_row_q] <= wr_data_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= '0; wr_bank_q <= 1'b0; rd_bank_q <= 1'b0; wr_row_q <= '0;
    end else if (clear_i) begin
      full_q <= '0; wr_bank_q <= 1'b0; rd_bank_q <= 1'b0; wr_row_q <= '0;
    end else begin
      if (wr_fire) begin
        if (int'(wr_row_q) == NU - 1) begin
          wr_row_q          <= '0;
          full_q[wr_bank_q] <= 1'b1;
          wr_bank_q         <= !wr_bank_q;
        end else begin
          wr_row_q <= wr_row_q + 1'b1;
        end
      end
      if (rd_release_i && rd_valid_o) begin
        full_q[rd_bank_q] <= 1'b0;
        rd_bank_q         <= !rd_bank_q;
      end
    end
  end

  a_release_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rd_release_i |-> rd_valid_o);
endmodule
