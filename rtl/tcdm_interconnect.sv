// tcdm_interconnect: fully combinational crossbar between the TCDM masters
// (cores, DMA, HWPE ports) and the word-interleaved L1 banks.
//
// Consecutive 64-bit words sit in consecutive banks: bank = addr[3 +: log2 NB],
// row = the bits above. In each cycle every bank grants one of the masters
// addressing it with a round-robin arbiter; the grant is returned in the
// same cycle, so an uncontended access has single-cycle latency, and the
// read data (and an rvalid for writes too) comes back one cycle later. A
// master that loses arbitration keeps its request up (it sees gnt = 0) and
// retries. The crossbar, its 64-bit width and the single-cycle latency follow
// the paper; the round-robin policy and the rvalid-on-write are this
// design's own choices.
module tcdm_interconnect
  import ita_pkg::*;
#(
  parameter int unsigned NM    = 4,
  parameter int unsigned NB    = NB_BANKS,
  parameter int unsigned WORDS = BANK_WORDS
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  tcdm_req_t [NM-1:0]               mst_req_i,
  output tcdm_rsp_t [NM-1:0]               mst_rsp_o,
  // bank side
  output logic      [NB-1:0]               bank_req_o,
  output logic      [NB-1:0]               bank_we_o,
  output logic      [NB-1:0][$clog2(WORDS)-1:0] bank_addr_o,
  output strb_t     [NB-1:0]               bank_be_o,
  output data_t     [NB-1:0]               bank_wdata_o,
  input  data_t     [NB-1:0]               bank_rdata_i
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned RW = $clog2(WORDS);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NM-1:0][BW-1:0] mst_bank;
  logic [NB-1:0][NM-1:0] bank_reqs, bank_gnts;
  logic [NB-1:0][MW-1:0] bank_idx;
  logic [NB-1:0]         bank_valid;
  logic [NM-1:0]         rvalid_q;
  logic [NM-1:0][BW-1:0] rbank_q;

  for (genvar m = 0; m < NM; m++) begin : g_dec
    assign mst_bank[m] = mst_req_i[m].addr[3 +: BW];
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    for (genvar m = 0; m < NM; m++) begin : g_req
      assign bank_reqs[b][m] = mst_req_i[m].req && (mst_bank[m] == BW'(b));
    end
    rr_arbiter #(.NUM(NM)) i_arb (
      .clk_i, .rst_ni,
      .req_i    (bank_reqs[b]),
      .advance_i(1'b1),
      .gnt_o    (bank_gnts[b]),
      .idx_o    (bank_idx[b]),
      .valid_o  (bank_valid[b])
    );
    assign bank_req_o[b]   = bank_valid[b];
    assign bank_we_o[b]    = mst_req_i[bank_idx[b]].we;
    assign bank_addr_o[b]  = mst_req_i[bank_idx[b]].addr[3 + BW +: RW];
    assign bank_be_o[b]    = mst_req_i[bank_idx[b]].be;
    assign bank_wdata_o[b] = mst_req_i[bank_idx[b]].wdata;
  end

  for (genvar m = 0; m < NM; m++) begin : g_rsp
    logic gnt;
    always_comb begin
      gnt = 1'b0;
      for (int b = 0; b < NB; b++) gnt |= bank_gnts[b][m];
    end
    assign mst_rsp_o[m].gnt    = gnt;
    assign mst_rsp_o[m].rvalid = rvalid_q[m];
    assign mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rvalid_q[m] <= 1'b0;
        rbank_q[m]  <= '0;
      end else begin
        rvalid_q[m] <= gnt;
        if (gnt) rbank_q[m] <= mst_bank[m];
      end
    end
  end
endmodule
