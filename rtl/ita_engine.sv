// ita_engine: the Integer Transformer Accelerator (ITA) datapath and its
// tile sequencer.
//
// One task computes one M x M output tile (M = 64) over one M-wide slice of
// the inner dimension:
//   out[i][j] = Act(Req(sum_k in[i][k] * w[j][k] + bias[j] + psum[i][j]))
// The weights are consumed in M/N groups of N rows. For weight group g the
// engine streams all M input rows i past the N dot product units, which hold
// the group's N weight rows (local weight-stationary), and produces N outputs
// of row i per cycle: a full tile takes M * M / N = 256 issue cycles.
// Meanwhile the double-buffered weight memory loads group g + 1.
//
// Pipeline (one issue per cycle when nothing stalls):
//   S0 issue : input row (through ITAMax EN in A x V tasks) and the weight
//              bank enter the dot product units; partial sum read starts.
//   S1       : accumulate dot + bias + partial sum. If more K-tiles follow,
//              write the sums back to the partial sum buffer and stop here.
//   S2       : requantised int8 values pass the activation unit into the
//              output FIFO; in Q x K^T tasks they also feed ITAMax DA.
// Issue stalls while the input stream, the weight bank, the bias (at the
// start of a group) or space in the output FIFO is missing.
//
// Streams (valid/ready): input rows and weight rows of M bytes, bias lines
// of N 32-bit words (low 24 bits used), output lines of N bytes.
// `start_i` latches `task_i`; `done_o` pulses when the tile has left the
// output FIFO and, if requested, ITAMax DI has finished.
// N, M, D, the units and their connection follow the paper's ITA figure and
// text; the loop order, pipeline depth and stall rules are this design's.
module ita_engine
  import ita_pkg::*;
#(
  parameter int unsigned OUT_DEPTH = 4
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   start_i,
  input  ita_task_t              task_i,
  output logic                   busy_o,
  output logic                   done_o,
  // input stream
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  input  logic [M-1:0][7:0]      in_data_i,
  // weight stream
  input  logic                   w_valid_i,
  output logic                   w_ready_o,
  input  logic [M-1:0][7:0]      w_data_i,
  // bias stream
  input  logic                   b_valid_i,
  output logic                   b_ready_o,
  input  logic [N-1:0][31:0]     b_data_i,
  // output stream
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output logic [N-1:0][7:0]      out_data_o,
  // event counters' strobes
  output logic                   stall_o
);
  localparam int unsigned RW = $clog2(M);
  localparam int unsigned GW = $clog2(GROUPS);

  typedef enum logic [1:0] {IDLE, ISSUE, DRAIN, INVERT} state_e;
  state_e state_q;

  ita_task_t        task_q;
  logic [RW-1:0]    i_q;
  logic [GW-1:0]    g_q;

  // weight buffer
  logic                       wb_valid, wb_release;
  logic [N-1:0][M-1:0][7:0]   wb_rows;
  // ITAMax
  logic [M-1:0][7:0]          en_y;
  logic                       di_busy, di_start, max_clear;
  // dot products
  logic [M-1:0][7:0]          a_vec;
  logic [N-1:0][D-1:0]        dot;
  // pipeline
  logic                       s1_v_q, s2_v_q;
  logic [N-1:0][D-1:0]        s1_dot_q;
  logic [N-1:0][BIAS_W-1:0]   s1_bias_q;
  logic [RW-1:0]              s1_i_q, s2_i_q;
  logic [GW-1:0]              s1_g_q;
  logic [N-1:0][D-1:0]        psum, acc;
  logic [N-1:0][7:0]          q, s2_q_q, act_y;
  // output FIFO
  logic                       of_ready;
  logic [$clog2(OUT_DEPTH+1)-1:0] of_cnt;

  logic use_bias, need_bias, space_ok, issue;
  assign use_bias  = task_q.bias_en && task_q.first_k;
  assign need_bias = use_bias && (i_q == '0);
  assign space_ok  = !task_q.last_k ||
                     (int'(of_cnt) + int'(s1_v_q) + int'(s2_v_q) < OUT_DEPTH);
  assign issue     = (state_q == ISSUE) && in_valid_i && wb_valid &&
                     (!need_bias || b_valid_i) && space_ok;
  assign stall_o   = (state_q == ISSUE) && !issue;

  assign in_ready_o = issue;
  assign b_ready_o  = issue && need_bias;
  assign wb_release = issue && (int'(i_q) == M - 1);

  ita_weight_buffer i_wbuf (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .wr_valid_i(w_valid_i), .wr_ready_o(w_ready_o), .wr_data_i(w_data_i),
    .rd_valid_o(wb_valid), .rd_release_i(wb_release), .rd_data_o(wb_rows)
  );

  // S0: input selection (ITAMax EN for A x V) and dot products
  assign a_vec = (task_q.op == OP_AV) ? en_y : in_data_i;

  ita_dotp i_dotp (.a_i(a_vec), .b_i(wb_rows), .res_o(dot));

  ita_sum_buffer i_sbuf (
    .clk_i,
    .rd_en_i  (issue && !task_q.first_k),
    .rd_addr_i({g_q, i_q}),
    .rd_data_o(psum),
    .wr_en_i  (s1_v_q && !task_q.last_k),
    .wr_addr_i({s1_g_q, s1_i_q}),
    .wr_data_i(acc)
  );

  // S1: accumulation and requantisation
  ita_accumulator i_acc (
    .dot_i(s1_dot_q), .bias_i(s1_bias_q), .psum_i(psum),
    .add_bias_i(use_bias), .add_psum_i(!task_q.first_k), .rq_i(task_q.rq),
    .acc_o(acc), .q_o(q)
  );

  // S2: activation, output FIFO, ITAMax DA
  ita_activation i_act (
    .q_i(s2_q_q), .mode_i(task_q.act),
    .gelu_b_i(task_q.gelu_b), .gelu_c_i(task_q.gelu_c), .gelu_one_i(task_q.gelu_one),
    .rq_i(task_q.act_rq), .y_o(act_y)
  );

  hwpe_fifo #(.WIDTH(N * 8), .DEPTH(OUT_DEPTH)) i_out_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .valid_i(s2_v_q), .ready_o(of_ready), .data_i(act_y),
    .valid_o(out_valid_o), .ready_i(out_ready_i), .data_o(out_data_o),
    .count_o(of_cnt)
  );

  assign max_clear = start_i && (task_i.op == OP_QK) && task_i.max_clear;

  ita_itamax i_max (
    .clk_i, .rst_ni, .clear_i(max_clear),
    .da_valid_i(s2_v_q && task_q.op == OP_QK), .da_row_i(s2_i_q), .da_x_i(act_y),
    .di_start_i(di_start), .di_busy_o(di_busy),
    .en_row_i(i_q), .en_x_i(in_data_i), .en_y_o(en_y)
  );

  logic drained;
  assign drained  = !s1_v_q && !s2_v_q && !out_valid_o;
  assign di_start = (state_q == DRAIN) && drained && task_q.op == OP_QK && task_q.max_invert;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; task_q <= '0; i_q <= '0; g_q <= '0;
      s1_v_q <= 1'b0; s2_v_q <= 1'b0; s1_dot_q <= '0; s1_bias_q <= '0;
      s1_i_q <= '0; s1_g_q <= '0; s2_i_q <= '0; s2_q_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      // pipeline registers
      s1_v_q <= issue;
      if (issue) begin
        s1_dot_q <= dot;
        s1_i_q   <= i_q;
        s1_g_q   <= g_q;
        if (need_bias)
          for (int n = 0; n < N; n++) s1_bias_q[n] <= b_data_i[n][BIAS_W-1:0];
      end
      s2_v_q <= s1_v_q && task_q.last_k;
      if (s1_v_q) begin
        s2_q_q <= q;
        s2_i_q <= s1_i_q;
      end
      // sequencer
      unique case (state_q)
        IDLE: if (start_i) begin
          task_q  <= task_i;
          i_q     <= '0;
          g_q     <= '0;
          state_q <= ISSUE;
        end
        ISSUE: if (issue) begin
          i_q <= i_q + 1'b1;
          if (int'(i_q) == M - 1) begin
            g_q <= g_q + 1'b1;
            if (int'(g_q) == GROUPS - 1) state_q <= DRAIN;
          end
        end
        DRAIN: if (drained) begin
          if (di_start) state_q <= INVERT;
          else begin
            state_q <= IDLE;
            done_o  <= 1'b1;
          end
        end
        INVERT: if (!di_busy) begin
          state_q <= IDLE;
          done_o  <= 1'b1;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != IDLE);

  a_out_fifo_space: assert property (@(posedge clk_i) disable iff (!rst_ni)
    s2_v_q |-> of_ready);
  a_start_idle: assert property (@(posedge clk_i) disable iff (!rst_ni)
    start_i |-> state_q == IDLE);
endmodule
