// hwpe_addressgen: two-level address generator shared by the HWPE streamers.
//
// After `start_i` it produces len0 * len1 line addresses
//   addr = base + i0 * stride0 + i1 * stride1,
// i0 counting fastest. `addr_o` is valid while `valid_o` is high and moves to
// the next address when `next_i` is pulsed. This design's own choice of a
// simple 2-D pattern, which covers every stream the ITA tiles need.
module hwpe_addressgen
  import ita_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  stream_cfg_t cfg_i,
  input  logic        next_i,
  output logic        valid_o,
  output addr_t       addr_o
);
  stream_cfg_t cfg_q;
  logic [15:0] i0_q, i1_q;
  addr_t       row_q, addr_q;
  logic        valid_q;

  assign valid_o = valid_q;
  assign addr_o  = addr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q <= '0; i0_q <= '0; i1_q <= '0; row_q <= '0; addr_q <= '0; valid_q <= 1'b0;
    end else if (start_i) begin
      cfg_q   <= cfg_i;
      i0_q    <= '0;
      i1_q    <= '0;
      row_q   <= cfg_i.base;
      addr_q  <= cfg_i.base;
      valid_q <= (cfg_i.len0 != 0) && (cfg_i.len1 != 0);
    end else if (next_i && valid_q) begin
      if (i0_q + 16'd1 < cfg_q.len0) begin
        i0_q   <= i0_q + 16'd1;
        addr_q <= addr_q + cfg_q.stride0;
      end else if (i1_q + 16'd1 < cfg_q.len1) begin
        i0_q   <= '0;
        i1_q   <= i1_q + 16'd1;
        row_q  <= row_q + cfg_q.stride1;
        addr_q <= row_q + cfg_q.stride1;
      end else begin
        valid_q <= 1'b0;
      end
    end
  end
endmodule
