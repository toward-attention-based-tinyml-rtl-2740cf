// hwpe_source_streamer: HWPE source streamer, a small DMA that reads lines of
// WORDS consecutive 64-bit words from the TCDM and presents them to the
// accelerator on a valid/ready stream.
//
// A two-level address generator (hwpe_addressgen) gives the start address of
// each line. The WORDS word requests of a line are raised together on WORDS
// TCDM ports; words the interconnect does not grant (bank conflicts) are
// requested again in the next cycle. Read data arrive one cycle after the
// grant and are assembled; a complete line is pushed into a DEPTH-entry
// FIFO. A new line is started in the cycle after the previous one is fully
// granted, provided the FIFO has a free slot for it, so an uncontended
// streamer delivers one line per cycle. `busy_o` is high from `start_i`
// until the last line has entered the FIFO. The existence of source
// streamers with a valid/ready accelerator side and FIFOs follows the paper;
// line width, address pattern and flow control are this design's choices.
module hwpe_source_streamer
  import ita_pkg::*;
#(
  parameter int unsigned WORDS = LINE_WORDS,
  parameter int unsigned DEPTH = 4
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
  output logic                     valid_o,
  input  logic                     ready_i,
  output logic [WORDS*TCDM_DW-1:0] data_o
);
  logic        ag_valid, ag_next;
  addr_t       ag_addr;
  logic        active_q;
  addr_t       line_addr_q;
  logic [WORDS-1:0] pend_q, pend_nxt, gnt, rvalid;
  logic [WORDS-1:0] got_q;
  logic [WORDS-1:0][TCDM_DW-1:0] asm_q, asm_nxt;
  logic [1:0]  outst_q;           // lines started, not yet pushed
  logic        push, fifo_ready, start_line, line_granted;
  logic [$clog2(DEPTH+1)-1:0] fifo_cnt;

  hwpe_addressgen i_ag (
    .clk_i, .rst_ni, .start_i, .cfg_i,
    .next_i(ag_next), .valid_o(ag_valid), .addr_o(ag_addr)
  );

  for (genvar w = 0; w < WORDS; w++) begin : g_w
    assign tcdm_req_o[w].req   = active_q && pend_q[w];
    assign tcdm_req_o[w].addr  = line_addr_q + addr_t'(8 * w);
    assign tcdm_req_o[w].we    = 1'b0;
    assign tcdm_req_o[w].be    = '1;
    assign tcdm_req_o[w].wdata = '0;
    assign gnt[w]    = tcdm_req_o[w].req && tcdm_rsp_i[w].gnt;
    assign rvalid[w] = tcdm_rsp_i[w].rvalid;
    assign asm_nxt[w] = rvalid[w] ? tcdm_rsp_i[w].rdata : asm_q[w];
  end

  assign pend_nxt     = pend_q & ~gnt;
  assign line_granted = active_q && (pend_nxt == '0);
  // A line is complete when every word has either arrived earlier or
  // arrives now, and nothing is left to grant.
  assign push = (outst_q != 0) && ((got_q | rvalid) == '1);
  // Credits: the FIFO must hold every line in flight plus the new one.
  assign start_line = ag_valid && (!active_q || line_granted) &&
                      (int'(fifo_cnt) + int'(outst_q) < DEPTH);
  assign ag_next = start_line;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0; line_addr_q <= '0; pend_q <= '0; got_q <= '0;
      asm_q <= '0; outst_q <= '0;
    end else begin
      asm_q <= asm_nxt;
      if (push) got_q <= '0;
      else      got_q <= got_q | rvalid;
      if (start_line) begin
        active_q    <= 1'b1;
        line_addr_q <= ag_addr;
        pend_q      <= '1;
      end else begin
        pend_q <= pend_nxt;
        if (line_granted) active_q <= 1'b0;
      end
      outst_q <= outst_q + (start_line ? 2'd1 : 2'd0) - (push ? 2'd1 : 2'd0);
    end
  end

  hwpe_fifo #(.WIDTH(WORDS*TCDM_DW), .DEPTH(DEPTH)) i_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .valid_i(push), .ready_o(fifo_ready), .data_i(asm_nxt),
    .valid_o, .ready_i, .data_o, .count_o(fifo_cnt)
  );

  assign busy_o = ag_valid || (outst_q != 0);

  a_push_accepted: assert property (@(posedge clk_i) disable iff (!rst_ni)
    push |-> fifo_ready);
endmodule
