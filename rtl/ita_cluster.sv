// ita_cluster: the accelerator-enhanced compute cluster, top level.
//
// The shared L1 TCDM (NB_BANKS = 32 banks of 4 KiB, 128 KiB, word
// interleaved) sits behind a single-cycle combinational 64-bit crossbar. Its
// masters are the cores' data ports (N_CORES = 9), the 512-bit DMA seen as
// N_DMA_PORTS = 8 64-bit ports, and the N_HWPE = 16 ports of the ITA HWPE
// subsystem. The HWPE controller is programmed from the narrow 64-bit AXI
// through an AXI-to-peripheral adapter. The Snitch cores, the DMA engine,
// the instruction cache and the AXI crossbars are existing components that
// are not part of this RTL: their TCDM ports and the configuration AXI port
// are ports of this module. `evt_o` is the accelerator's task-done event,
// `hwpe_stall_o` is high in cycles in which the engine waits for data.
module ita_cluster
  import ita_pkg::*;
(
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  tcdm_req_t [N_CORES-1:0]    core_req_i,
  output tcdm_rsp_t [N_CORES-1:0]    core_rsp_o,
  input  tcdm_req_t [N_DMA_PORTS-1:0] dma_req_i,
  output tcdm_rsp_t [N_DMA_PORTS-1:0] dma_rsp_o,
  input  axi_req_t                   cfg_axi_req_i,
  output axi_rsp_t                   cfg_axi_rsp_o,
  output logic                       evt_o,
  output logic                       hwpe_busy_o,
  output logic                       hwpe_stall_o
);
  localparam int unsigned NM = N_CORES + N_DMA_PORTS + N_HWPE;
  localparam int unsigned RW = $clog2(BANK_WORDS);

  tcdm_req_t [NM-1:0]     mst_req;
  tcdm_rsp_t [NM-1:0]     mst_rsp;
  tcdm_req_t [N_HWPE-1:0] hwpe_req;
  per_req_t               per_req;
  per_rsp_t               per_rsp;

  logic [NB_BANKS-1:0]          bank_req, bank_we;
  logic [NB_BANKS-1:0][RW-1:0]  bank_addr;
  strb_t [NB_BANKS-1:0]         bank_be;
  data_t [NB_BANKS-1:0]         bank_wdata, bank_rdata;

  assign mst_req    = {hwpe_req, dma_req_i, core_req_i};
  assign core_rsp_o = mst_rsp[N_CORES-1:0];
  assign dma_rsp_o  = mst_rsp[N_CORES +: N_DMA_PORTS];

  tcdm_interconnect #(.NM(NM), .NB(NB_BANKS), .WORDS(BANK_WORDS)) i_xbar (
    .clk_i, .rst_ni,
    .mst_req_i(mst_req), .mst_rsp_o(mst_rsp),
    .bank_req_o(bank_req), .bank_we_o(bank_we), .bank_addr_o(bank_addr),
    .bank_be_o(bank_be), .bank_wdata_o(bank_wdata), .bank_rdata_i(bank_rdata)
  );

  for (genvar b = 0; b < NB_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS), .DW(TCDM_DW)) i_bank (
      .clk_i, .req_i(bank_req[b]), .we_i(bank_we[b]), .addr_i(bank_addr[b]),
      .be_i(bank_be[b]), .wdata_i(bank_wdata[b]), .rdata_o(bank_rdata[b])
    );
  end

  axi_to_periph i_axi2per (
    .clk_i, .rst_ni, .axi_req_i(cfg_axi_req_i), .axi_rsp_o(cfg_axi_rsp_o),
    .per_req_o(per_req), .per_rsp_i(per_rsp)
  );

  ita_hwpe i_hwpe (
    .clk_i, .rst_ni, .per_req_i(per_req), .per_rsp_o(per_rsp),
    .tcdm_req_o(hwpe_req), .tcdm_rsp_i(mst_rsp[N_CORES + N_DMA_PORTS +: N_HWPE]),
    .evt_o, .busy_o(hwpe_busy_o), .stall_o(hwpe_stall_o)
  );
endmodule
