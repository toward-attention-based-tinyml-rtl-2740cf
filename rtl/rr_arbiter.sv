// rr_arbiter: round-robin arbiter used by the TCDM crossbar and the HWPE
// port multiplexer.
//
// Combinational grant of one of NUM requesters. The requester after the last
// granted one has highest priority, so every requester is served within NUM
// grants (starvation freedom). The pointer advances only when `advance_i` is
// high in a cycle with a grant.
module rr_arbiter #(
  parameter  int unsigned NUM = 4,
  localparam int unsigned IW  = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [NUM-1:0]         req_i,
  input  logic                   advance_i,
  output logic [NUM-1:0]         gnt_o,
  output logic [IW-1:0]          idx_o,
  output logic                   valid_o
);
  logic [IW-1:0] prio_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int k = 0; k < NUM; k++) begin
      int unsigned c;
      c = (int'(prio_q) + k) % NUM;
      if (!valid_o && req_i[c]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(c);
        gnt_o[c] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) prio_q <= '0;
    else if (advance_i && valid_o)
      prio_q <= (int'(idx_o) == NUM - 1) ? '0 : IW'(idx_o + 1'b1);
  end
endmodule
