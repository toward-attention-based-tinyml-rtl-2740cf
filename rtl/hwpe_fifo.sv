// hwpe_fifo: valid/ready stream FIFO of the HWPE subsystem.
//
// DEPTH entries of WIDTH bits, first-word-fall-through: the oldest entry is
// on `data_o` whenever `valid_o` is high, and is removed by `ready_i`. A push
// and a pop may happen in the same cycle, also when the FIFO is full.
// `count_o` reports the fill level for credit-based flow control. The paper
// states that FIFOs sit on both the TCDM and the accelerator side of the
// streamers and are sized per accelerator; the structure is this design's.
module hwpe_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 2
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     clear_i,
  input  logic                     valid_i,
  output logic                     ready_o,
  input  logic [WIDTH-1:0]         data_i,
  output logic                     valid_o,
  input  logic                     ready_i,
  output logic [WIDTH-1:0]         data_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic push, pop;

  assign valid_o = (cnt_q != 0);
  assign ready_o = (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]) || ready_i;
  assign push    = valid_i && ready_o;
  assign pop     = valid_o && ready_i;
  assign data_o  = mem[rd_q];
  assign count_o = cnt_q;

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else if (clear_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      if (push && !pop) cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem[wr_q] <= data_i;
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (cnt_q <= DEPTH[$clog2(DEPTH+1)-1:0]));
endmodule
