// hwpe_ctrl: HWPE controller of the ITA subsystem: a memory-mapped,
// dual-context job register file and the FSM that runs the queued tasks.
//
// Software programs a task without waiting for the running one:
//   1. read ACQUIRE (0x04): returns the id of the context that is being
//      programmed, or all ones when both contexts hold queued tasks;
//   2. write the 13 job registers at 0x40 + 4*k (layout in ita_pkg);
//   3. write TRIGGER (0x00): the context is queued and programming moves on
//      to the other context.
// The FSM takes queued contexts in order. For each it reads the context,
// hands the decoded task to the engine, configures the four streamers
// (input, weight, bias, output) for the task's M x M tile and pulses their
// start; it then waits for the engine to report done and the output
// streamer to have written everything, frees the context, counts the task
// in DONE_CNT (0x14) and pulses `evt_o` for one cycle. STATUS (0x08) reads
// {queued[1:0], busy}, RUNNING (0x0C) the context being run, CLEAR (0x10)
// drops all queued tasks while idle.
// Peripheral port: gnt in the request cycle, rvalid/rdata one cycle later.
// The dual-context register file, the FSM's job and the programming over
// the peripheral interface follow the paper; the register map and the
// streamer patterns are this design's.
module hwpe_ctrl
  import ita_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  per_req_t    per_req_i,
  output per_rsp_t    per_rsp_o,
  // engine
  output logic        eng_start_o,
  output ita_task_t   eng_task_o,
  input  logic        eng_done_i,
  // streamers: 0 input, 1 weight, 2 bias, 3 output
  output logic        str_start_o,
  output stream_cfg_t [3:0] str_cfg_o,
  input  logic        sink_busy_i,
  output logic        evt_o,
  output logic        busy_o
);
  typedef enum logic [1:0] {C_IDLE, C_START, C_RUN, C_FINISH} cstate_e;
  cstate_e state_q;

  logic [NUM_CTX-1:0][NUM_JOB_REGS-1:0][31:0] regs_q;
  logic [NUM_CTX-1:0] queued_q;
  logic               wr_ctx_q, rd_ctx_q;
  logic               eng_done_q;
  logic [31:0]        done_cnt_q;
  logic               rvalid_q;
  logic [31:0]        rdata_q;
  ita_task_t          t;

  logic [7:0] off;
  logic       acc_wr, acc_rd, trigger, clear;
  assign off     = per_req_i.addr[7:0];
  assign acc_wr  = per_req_i.req && per_req_i.we;
  assign acc_rd  = per_req_i.req && !per_req_i.we;
  assign trigger = acc_wr && off == REG_TRIGGER && !queued_q[wr_ctx_q];
  assign clear   = acc_wr && off == REG_CLEAR && state_q == C_IDLE;

  assign per_rsp_o.gnt    = per_req_i.req;
  assign per_rsp_o.rvalid = rvalid_q;
  assign per_rsp_o.rdata  = rdata_q;

  function automatic logic [31:0] bemask(input logic [31:0] o, input logic [31:0] n,
                                         input logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) o[b*8 +: 8] = n[b*8 +: 8];
    return o;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regs_q <= '0; wr_ctx_q <= 1'b0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= per_req_i.req;
      if (acc_wr && off >= REG_JOB_BASE &&
          off < REG_JOB_BASE + 8'(4 * NUM_JOB_REGS) && !queued_q[wr_ctx_q])
        regs_q[wr_ctx_q][(off - REG_JOB_BASE) >> 2] <=
          bemask(regs_q[wr_ctx_q][(off - REG_JOB_BASE) >> 2], per_req_i.wdata, per_req_i.be);
      if (clear) wr_ctx_q <= rd_ctx_q;
      else if (trigger) wr_ctx_q <= !wr_ctx_q;
      if (acc_rd) begin
        unique case (off)
          REG_ACQUIRE:  rdata_q <= queued_q[wr_ctx_q] ? 32'hFFFF_FFFF : 32'(wr_ctx_q);
          REG_STATUS:   rdata_q <= {29'd0, 2'(int'(queued_q[0]) + int'(queued_q[1])),
                                    state_q != C_IDLE};
          REG_RUNNING:  rdata_q <= 32'(rd_ctx_q);
          REG_DONE_CNT: rdata_q <= done_cnt_q;
          default:      rdata_q <= (off >= REG_JOB_BASE && off < REG_JOB_BASE + 8'(4 * NUM_JOB_REGS))
                                   ? regs_q[wr_ctx_q][(off - REG_JOB_BASE) >> 2] : 32'd0;
        endcase
      end
    end
  end

  // task runner
  assign t = unpack_task(regs_q[rd_ctx_q]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= C_IDLE; queued_q <= '0; rd_ctx_q <= 1'b0; eng_done_q <= 1'b0;
      done_cnt_q <= '0;
    end else begin
      if (trigger) queued_q[wr_ctx_q] <= 1'b1;
      unique case (state_q)
        C_IDLE: begin
          if (clear) queued_q <= '0;
          else if (queued_q[rd_ctx_q]) state_q <= C_START;
        end
        C_START: begin
          eng_done_q <= 1'b0;
          state_q    <= C_RUN;
        end
        C_RUN: begin
          if (eng_done_i) eng_done_q <= 1'b1;
          if ((eng_done_q || eng_done_i) && !sink_busy_i) state_q <= C_FINISH;
        end
        C_FINISH: begin
          queued_q[rd_ctx_q] <= 1'b0;
          rd_ctx_q   <= !rd_ctx_q;
          done_cnt_q <= done_cnt_q + 1;
          state_q    <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  assign eng_start_o = (state_q == C_START);
  assign str_start_o = (state_q == C_START);
  assign eng_task_o  = t;
  assign evt_o       = (state_q == C_FINISH);
  assign busy_o      = (state_q != C_IDLE);

  always_comb begin
    str_cfg_o = '0;
    // input rows, once per weight group
    str_cfg_o[0].base    = t.in_base;
    str_cfg_o[0].stride0 = t.in_stride;
    str_cfg_o[0].len0    = 16'(M);
    str_cfg_o[0].stride1 = '0;
    str_cfg_o[0].len1    = 16'(GROUPS);
    // weight rows
    str_cfg_o[1].base    = t.w_base;
    str_cfg_o[1].stride0 = t.w_stride;
    str_cfg_o[1].len0    = 16'(M);
    str_cfg_o[1].len1    = 16'd1;
    // bias: one line of N words per group, only on the first K-tile
    str_cfg_o[2].base    = t.bias_base;
    str_cfg_o[2].stride0 = 32'(N * 4);
    str_cfg_o[2].len0    = (t.bias_en && t.first_k) ? 16'(GROUPS) : 16'd0;
    str_cfg_o[2].len1    = 16'd1;
    // output: N bytes of row i, group g, only on the last K-tile
    str_cfg_o[3].base    = t.out_base;
    str_cfg_o[3].stride0 = t.out_stride;
    str_cfg_o[3].len0    = t.last_k ? 16'(M) : 16'd0;
    str_cfg_o[3].stride1 = 32'(N);
    str_cfg_o[3].len1    = 16'(GROUPS);
  end

  a_start_queued: assert property (@(posedge clk_i) disable iff (!rst_ni)
    eng_start_o |-> queued_q[rd_ctx_q]);
endmodule
