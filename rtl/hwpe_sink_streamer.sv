// hwpe_sink_streamer: HWPE sink streamer, which takes lines of WORDS 64-bit
// words from the accelerator's valid/ready output stream and writes them to
// the TCDM.
//
// Incoming lines wait in a DEPTH-entry FIFO. The head line is written with
// WORDS parallel word requests at the address the two-level address generator
// gives; words not granted (bank conflicts) are requested again in the next
// cycle, and the next line starts in the cycle after the last word of the
// previous one was granted. `busy_o` is high from `start_i` until every line
// of the pattern has been written. Sink streamers, their valid/ready protocol
// and FIFOs follow the paper; the rest is this design's choice.
module hwpe_sink_streamer
  import ita_pkg::*;
#(
  parameter int unsigned WORDS = OUT_WORDS,
  parameter int unsigned DEPTH = 2
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     start_i,
  input  stream_cfg_t              cfg_i,
  output logic                     busy_o,
  // TCDM side
  output tcdm_req_t [WORDS-1:0]    tcdm_req_o,
  input  tcdm_rsp_t [WORDS-1:0]    tcdm_rsp_i,
  // stream side
  input  logic                     valid_i,
  output logic                     ready_o,
  input  logic [WORDS*TCDM_DW-1:0] data_i
);
  logic        ag_valid, ag_next;
  addr_t       ag_addr;
  logic        active_q;
  addr_t       line_addr_q;
  logic [WORDS-1:0] pend_q, pend_nxt, gnt;
  logic [WORDS-1:0][TCDM_DW-1:0] line_q;
  logic        f_valid, f_ready, start_line, line_granted;
  logic [WORDS*TCDM_DW-1:0] f_data;
  logic [$clog2(DEPTH+1)-1:0] f_cnt;

  hwpe_addressgen i_ag (
    .clk_i, .rst_ni, .start_i, .cfg_i,
    .next_i(ag_next), .valid_o(ag_valid), .addr_o(ag_addr)
  );

  hwpe_fifo #(.WIDTH(WORDS*TCDM_DW), .DEPTH(DEPTH)) i_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .valid_i, .ready_o, .data_i,
    .valid_o(f_valid), .ready_i(f_ready), .data_o(f_data), .count_o(f_cnt)
  );

  for (genvar w = 0; w < WORDS; w++) begin : g_w
    assign tcdm_req_o[w].req   = active_q && pend_q[w];
    assign tcdm_req_o[w].addr  = line_addr_q + addr_t'(8 * w);
    assign tcdm_req_o[w].we    = 1'b1;
    assign tcdm_req_o[w].be    = '1;
    assign tcdm_req_o[w].wdata = line_q[w];
    assign gnt[w] = tcdm_req_o[w].req && tcdm_rsp_i[w].gnt;
  end

  assign pend_nxt     = pend_q & ~gnt;
  assign line_granted = active_q && (pend_nxt == '0);
  assign start_line   = ag_valid && f_valid && (!active_q || line_granted);
  assign f_ready      = start_line;
  assign ag_next      = start_line;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0; line_addr_q <= '0; pend_q <= '0; line_q <= '0;
    end else if (start_line) begin
      active_q    <= 1'b1;
      line_addr_q <= ag_addr;
      pend_q      <= '1;
      line_q      <= f_data;
    end else begin
      pend_q <= pend_nxt;
      if (line_granted) active_q <= 1'b0;
    end
  end

  assign busy_o = ag_valid || active_q;
endmodule
