// tb_tcdm_bank: random byte-masked writes and reads against an array model;
// checks read data and its one-cycle latency.
module tb_tcdm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we; logic [8:0] addr; logic [7:0] be; logic [63:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [63:0] model [512];

  tcdm_bank #(.WORDS(512), .DW(64)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial run();

  task automatic run();
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // initialise every word
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); req = 1; we = 1; addr = 9'(a); be = '1; wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = 1; addr = 9'($urandom % 512); we = $urandom % 2; be = 8'($urandom); wdata = {$urandom, $urandom};
      if (we) begin
        for (int b = 0; b < 8; b++) if (be[b]) model[addr][b*8 +: 8] = wdata[b*8 +: 8];
      end else begin
        logic [63:0] exp = model[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== exp) begin failures++; $display("read %0d: %h vs %h", addr, rdata, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
