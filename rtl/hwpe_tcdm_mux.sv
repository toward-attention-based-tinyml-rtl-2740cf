// hwpe_tcdm_mux: time-multiplexes the HWPE streamers onto the subsystem's
// NP TCDM master ports.
//
// Streamer s owns NW[s] word ports (a full 64-byte line is 8 words, the
// output line 2 words). In every cycle the streamers that request anything
// are packed greedily into the NP ports, starting from a priority pointer
// that rotates every cycle, so each streamer is first in line at least once
// every NS cycles and none starves. A streamer that does not fit in this
// cycle sees no grant and keeps its requests up. Grants come straight from
// the interconnect; read responses are routed back one cycle later to the
// streamer and word that owned the port in the grant cycle. With NP = 16,
// two full lines (128 bytes) move per cycle. Time multiplexing onto
// N_HWPE = 16 ports follows the paper; the packing policy is this design's.
module hwpe_tcdm_mux
  import ita_pkg::*;
#(
  parameter int unsigned           NS = 4,
  parameter int unsigned           NP = N_HWPE,
  parameter logic [NS-1:0][3:0]    NW = {4'd2, 4'd8, 4'd8, 4'd8}
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  tcdm_req_t [NS-1:0][7:0]      s_req_i,
  output tcdm_rsp_t [NS-1:0][7:0]      s_rsp_o,
  output tcdm_req_t [NP-1:0]           p_req_o,
  input  tcdm_rsp_t [NP-1:0]           p_rsp_i
);
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;
  localparam int unsigned PW = $clog2(NP + 1);

  logic [SW-1:0]           ptr_q;
  logic [NS-1:0]           alloc;
  logic [NS-1:0][PW-1:0]   off;
  logic [NS-1:0]           wants;
  logic [NP-1:0][SW-1:0]   own, own_q;
  logic [NP-1:0][2:0]      wrd, wrd_q;
  logic [NP-1:0]           used_p, gnt_q;

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      wants[s] = 1'b0;
      for (int w = 0; w < 8; w++) if (w < int'(NW[s])) wants[s] |= s_req_i[s][w].req;
    end
  end

  always_comb begin
    int unsigned used;
    used  = 0;
    alloc = '0;
    off   = '0;
    for (int k = 0; k < NS; k++) begin
      int unsigned s;
      s = (int'(ptr_q) + k) % NS;
      if (wants[s] && (used + int'(NW[s]) <= NP)) begin
        alloc[s] = 1'b1;
        off[s]   = PW'(used);
        used     = used + int'(NW[s]);
      end
    end
  end

  always_comb begin
    p_req_o = '0;
    own     = '0;
    wrd     = '0;
    used_p  = '0;
    for (int s = 0; s < NS; s++) begin
      for (int w = 0; w < 8; w++) begin
        if (alloc[s] && w < int'(NW[s])) begin
          p_req_o[int'(off[s]) + w] = s_req_i[s][w];
          own[int'(off[s]) + w]     = SW'(s);
          wrd[int'(off[s]) + w]     = 3'(w);
          used_p[int'(off[s]) + w]  = 1'b1;
        end
      end
    end
  end

  always_comb begin
    s_rsp_o = '0;
    for (int s = 0; s < NS; s++)
      for (int w = 0; w < 8; w++)
        if (alloc[s] && w < int'(NW[s]))
          s_rsp_o[s][w].gnt = p_rsp_i[int'(off[s]) + w].gnt;
    for (int p = 0; p < NP; p++) begin
      if (gnt_q[p] && p_rsp_i[p].rvalid) begin
        s_rsp_o[own_q[p]][wrd_q[p]].rvalid = 1'b1;
        s_rsp_o[own_q[p]][wrd_q[p]].rdata  = p_rsp_i[p].rdata;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0; own_q <= '0; wrd_q <= '0; gnt_q <= '0;
    end else begin
      ptr_q <= (int'(ptr_q) == NS - 1) ? '0 : ptr_q + 1'b1;
      own_q <= own;
      wrd_q <= wrd;
      for (int p = 0; p < NP; p++) gnt_q[p] <= used_p[p] && p_req_o[p].req && p_rsp_i[p].gnt;
    end
  end
endmodule
