// ita_sum_buffer: partial sum buffer of the ITA engine.
//
// Holds the D-bit partial sums of one M x M output tile, arranged as
// M^2/N entries of N sums (one entry per output row and weight group), so
// that the products of a long inner dimension can be accumulated over
// several M-wide K-tiles before requantisation. One synchronous read port
// (data one cycle after `rd_en_i`) and one write port; a read and a write of
// different entries may happen in the same cycle. The M^2/N x N x D shape
// follows the paper; the port timing is this design's.
module ita_sum_buffer
  import ita_pkg::*;
#(
  parameter int unsigned NU      = N,
  parameter int unsigned ENTRIES = M * M / N,
  parameter int unsigned DW      = D
) (
  input  logic                         clk_i,
  input  logic                         rd_en_i,
  input  logic [$clog2(ENTRIES)-1:0]   rd_addr_i,
  output logic [NU-1:0][DW-1:0]        rd_data_o,
  input  logic                         wr_en_i,
  input  logic [$clog2(ENTRIES)-1:0]   wr_addr_i,
  input  logic [NU-1:0][DW-1:0]        wr_data_i
);
  logic [NU*DW-1:0] mem [ENTRIES];

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end
endmodule
