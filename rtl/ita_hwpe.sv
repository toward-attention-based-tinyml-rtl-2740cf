// ita_hwpe: the HWPE subsystem that wraps the ITA engine for the cluster.
//
// Contents: the controller (dual-context job registers + FSM), three source
// streamers (input rows, weight rows, bias lines; 64 bytes per line), one
// sink streamer (output lines of N = 16 bytes), the port multiplexer that
// shares N_HWPE = 16 64-bit TCDM master ports among the four streamers, and
// the ITA engine. Peak traffic is two 64-byte lines per cycle, the 128 B per
// cycle the engine needs to take one input vector and one weight row per
// cycle. Tasks are programmed through the 32-bit peripheral port; `evt_o`
// pulses when a task has finished and its output is in memory. The set of
// components and the 16 ports follow the paper; the widths of the bias and
// output lines and the FIFO depths are this design's choices.
module ita_hwpe
  import ita_pkg::*;
(
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  per_req_t                 per_req_i,
  output per_rsp_t                 per_rsp_o,
  output tcdm_req_t [N_HWPE-1:0]   tcdm_req_o,
  input  tcdm_rsp_t [N_HWPE-1:0]   tcdm_rsp_i,
  output logic                     evt_o,
  output logic                     busy_o,
  output logic                     stall_o
);
  logic        eng_start, eng_done, str_start, sink_busy, eng_busy;
  ita_task_t   eng_task;
  stream_cfg_t [3:0] str_cfg;
  logic [2:0]  src_busy;

  tcdm_req_t [3:0][7:0] s_req;
  tcdm_rsp_t [3:0][7:0] s_rsp;

  logic in_valid, in_ready, w_valid, w_ready, b_valid, b_ready, o_valid, o_ready;
  logic [LINE_W-1:0] in_data, w_data, b_data;
  logic [OUT_W-1:0]  o_data;

  hwpe_ctrl i_ctrl (
    .clk_i, .rst_ni, .per_req_i, .per_rsp_o,
    .eng_start_o(eng_start), .eng_task_o(eng_task), .eng_done_i(eng_done),
    .str_start_o(str_start), .str_cfg_o(str_cfg), .sink_busy_i(sink_busy),
    .evt_o, .busy_o
  );

  hwpe_source_streamer i_src_in (
    .clk_i, .rst_ni, .start_i(str_start), .cfg_i(str_cfg[0]), .busy_o(src_busy[0]),
    .tcdm_req_o(s_req[0]), .tcdm_rsp_i(s_rsp[0]),
    .valid_o(in_valid), .ready_i(in_ready), .data_o(in_data)
  );
  hwpe_source_streamer i_src_w (
    .clk_i, .rst_ni, .start_i(str_start), .cfg_i(str_cfg[1]), .busy_o(src_busy[1]),
    .tcdm_req_o(s_req[1]), .tcdm_rsp_i(s_rsp[1]),
    .valid_o(w_valid), .ready_i(w_ready), .data_o(w_data)
  );
  hwpe_source_streamer i_src_b (
    .clk_i, .rst_ni, .start_i(str_start), .cfg_i(str_cfg[2]), .busy_o(src_busy[2]),
    .tcdm_req_o(s_req[2]), .tcdm_rsp_i(s_rsp[2]),
    .valid_o(b_valid), .ready_i(b_ready), .data_o(b_data)
  );

  tcdm_req_t [OUT_WORDS-1:0] o_req;
  hwpe_sink_streamer i_sink (
    .clk_i, .rst_ni, .start_i(str_start), .cfg_i(str_cfg[3]), .busy_o(sink_busy),
    .tcdm_req_o(o_req), .tcdm_rsp_i(s_rsp[3][OUT_WORDS-1:0]),
    .valid_i(o_valid), .ready_o(o_ready), .data_i(o_data)
  );
  always_comb begin
    s_req[3] = '0;
    s_req[3][OUT_WORDS-1:0] = o_req;
  end

  hwpe_tcdm_mux #(.NS(4), .NP(N_HWPE), .NW({4'(OUT_WORDS), 4'd8, 4'd8, 4'd8})) i_mux (
    .clk_i, .rst_ni, .s_req_i(s_req), .s_rsp_o(s_rsp),
    .p_req_o(tcdm_req_o), .p_rsp_i(tcdm_rsp_i)
  );

  ita_engine i_engine (
    .clk_i, .rst_ni, .start_i(eng_start), .task_i(eng_task),
    .busy_o(eng_busy), .done_o(eng_done),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_data_i(w_data),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_data_i(b_data),
    .out_valid_o(o_valid), .out_ready_i(o_ready), .out_data_o(o_data),
    .stall_o
  );

  a_streams_idle_at_start: assert property (@(posedge clk_i) disable iff (!rst_ni)
    str_start |-> (src_busy == '0) && !eng_busy);
endmodule
