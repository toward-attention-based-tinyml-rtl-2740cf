// axi_to_periph: adapter from the cluster's 64-bit narrow AXI to the 32-bit
// peripheral interface of the HWPE controller.
//
// Accepts one transaction at a time. A write takes AW and W together, turns
// the 32-bit half of the 64-bit beat selected by addr[2] into a peripheral
// write, and answers on B with the AW id once the peripheral has responded.
// A read takes AR, issues a peripheral read and returns the 32-bit result in
// both halves of the R beat with the AR id. Only single-beat bursts
// (len = 0) are supported; the adapter answers a longer burst with SLVERR
// after consuming it, without touching the peripheral. Writes have priority
// over reads when both arrive together. The adapter's place between AXI and
// the controller follows the paper; everything else is this design's.
module axi_to_periph
  import ita_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output per_req_t per_req_o,
  input  per_rsp_t per_rsp_i
);
  typedef enum logic [2:0] {A_IDLE, A_WREQ, A_WWAIT, A_B, A_RREQ, A_RWAIT, A_R, A_WDRAIN} astate_e;
  astate_e state_q;

  logic [AXI_IW-1:0] id_q;
  logic [31:0]       addr_q, wdata_q, rdata_q;
  logic [3:0]        be_q;
  logic              err_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= A_IDLE; id_q <= '0; addr_q <= '0; wdata_q <= '0; rdata_q <= '0;
      be_q <= '0; err_q <= 1'b0;
    end else begin
      unique case (state_q)
        A_IDLE: begin
          if (axi_req_i.aw_valid && axi_req_i.w_valid) begin
            id_q    <= axi_req_i.aw_id;
            addr_q  <= axi_req_i.aw_addr;
            wdata_q <= axi_req_i.aw_addr[2] ? axi_req_i.w_data[63:32] : axi_req_i.w_data[31:0];
            be_q    <= axi_req_i.aw_addr[2] ? axi_req_i.w_strb[7:4] : axi_req_i.w_strb[3:0];
            err_q   <= (axi_req_i.aw_len != 0);
            state_q <= (axi_req_i.aw_len != 0) ? (axi_req_i.w_last ? A_B : A_WDRAIN) : A_WREQ;
          end else if (axi_req_i.ar_valid) begin
            id_q    <= axi_req_i.ar_id;
            addr_q  <= axi_req_i.ar_addr;
            err_q   <= (axi_req_i.ar_len != 0);
            rdata_q <= '0;
            state_q <= (axi_req_i.ar_len != 0) ? A_R : A_RREQ;
          end
        end
        A_WDRAIN: if (axi_req_i.w_valid && axi_req_i.w_last) state_q <= A_B;
        A_WREQ:   if (per_rsp_i.gnt) state_q <= A_WWAIT;
        A_WWAIT:  if (per_rsp_i.rvalid) state_q <= A_B;
        A_B:      if (axi_req_i.b_ready) state_q <= A_IDLE;
        A_RREQ:   if (per_rsp_i.gnt) state_q <= A_RWAIT;
        A_RWAIT:  if (per_rsp_i.rvalid) begin
          rdata_q <= per_rsp_i.rdata;
          state_q <= A_R;
        end
        A_R:      if (axi_req_i.r_ready) state_q <= A_IDLE;
        default:  state_q <= A_IDLE;
      endcase
    end
  end

  always_comb begin
    axi_rsp_o = '0;
    axi_rsp_o.aw_ready = (state_q == A_IDLE) && axi_req_i.aw_valid && axi_req_i.w_valid;
    axi_rsp_o.w_ready  = axi_rsp_o.aw_ready || (state_q == A_WDRAIN);
    axi_rsp_o.ar_ready = (state_q == A_IDLE) && !(axi_req_i.aw_valid && axi_req_i.w_valid);
    axi_rsp_o.b_valid  = (state_q == A_B);
    axi_rsp_o.b_id     = id_q;
    axi_rsp_o.b_resp   = err_q ? 2'b10 : 2'b00;
    axi_rsp_o.r_valid  = (state_q == A_R);
    axi_rsp_o.r_id     = id_q;
    axi_rsp_o.r_data   = {rdata_q, rdata_q};
    axi_rsp_o.r_resp   = err_q ? 2'b10 : 2'b00;
    axi_rsp_o.r_last   = 1'b1;
    per_req_o.req   = (state_q == A_WREQ) || (state_q == A_RREQ);
    per_req_o.addr  = {addr_q[31:3], addr_q[2], 2'b00};
    per_req_o.we    = (state_q == A_WREQ);
    per_req_o.be    = be_q;
    per_req_o.wdata = wdata_q;
  end

  // AXI rule: a response stays valid, with the same id, until it is taken.
  a_b_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_rsp_o.b_valid && !axi_req_i.b_ready |=> axi_rsp_o.b_valid && $stable(axi_rsp_o.b_id));
  a_r_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_rsp_o.r_valid && !axi_req_i.r_ready |=> axi_rsp_o.r_valid && $stable(axi_rsp_o.r_data));
endmodule
