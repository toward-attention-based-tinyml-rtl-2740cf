// tcdm_bank: one bank of the shared L1 tightly-coupled data memory (TCDM).
//
// A single-port synchronous SRAM of WORDS x 64-bit words (4 KiB by default,
// 32 of them make the 128 KiB L1). A request is accepted every cycle; a write
// updates the bytes selected by `be`, a read returns the word on `rdata` in
// the following cycle. Written as an array so that it simulates and
// synthesises as a memory; a taped-out chip would use an SRAM macro with the
// same ports. The bank size is given by the paper, the port protocol is this
// design's own choice.
module tcdm_bank #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned DW    = 64
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW/8-1:0]          be_i,
  input  logic [DW-1:0]            wdata_i,
  output logic [DW-1:0]            rdata_o
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < DW/8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
