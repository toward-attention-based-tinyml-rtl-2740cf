// tb_hwpe_sink_streamer: sink streamer with random input validity and a
// TCDM model with random grant denial. Checks that each line lands at the
// 2-D pattern's address, that nothing else is written, and that busy drops
// once everything is written.
module tb_hwpe_sink_streamer;
  import ita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, valid, ready;
  stream_cfg_t cfg;
  tcdm_req_t [1:0] req;
  tcdm_rsp_t [1:0] rsp;
  logic [127:0] data;
  int checks = 0, failures = 0, deny_pct = 30, writes = 0;
  logic [63:0] mem [logic [31:0]];
  logic [1:0] deny;

  hwpe_sink_streamer #(.WORDS(2), .DEPTH(2)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .cfg_i(cfg), .busy_o(busy), .tcdm_req_o(req), .tcdm_rsp_i(rsp), .valid_i(valid), .ready_o(ready),
    .data_i(data));

  always_comb for (int w = 0; w < 2; w++) begin
    rsp[w].gnt = req[w].req && !deny[w];
    rsp[w].rvalid = 1'b0; rsp[w].rdata = '0;
  end
  always @(negedge clk) for (int w = 0; w < 2; w++) deny[w] = ($urandom % 100) < deny_pct;
  always @(posedge clk) for (int w = 0; w < 2; w++) if (req[w].req && rsp[w].gnt) begin
    if (!req[w].we || req[w].be != '1) failures++;
    mem[req[w].addr] = req[w].wdata;
    writes++;
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [127:0] line_of(input int n);
    return {32'(n), 32'hCAFE0000 + 32'(n), 32'(n * 7), 32'hBEEF0000 + 32'(n)};
  endfunction

  initial run();

  task automatic run();
    stream_cfg_t c;
    int n = 0, total;
    start = 0; valid = 0; data = '0; cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    c = '{base: 32'h400, stride0: 32'd64, len0: 16'd64, stride1: 32'd16, len1: 16'd4};
    total = 256;
    @(negedge clk); cfg = c; start = 1; @(negedge clk); start = 0;
    while (n < total) begin
      valid = ($urandom % 4) != 0; data = line_of(n);
      @(posedge clk);
      if (valid && ready) n++;
      @(negedge clk);
    end
    valid = 0;
    while (busy) @(negedge clk);
    checks++; if (writes != 2 * total) begin failures++; $display("writes %0d", writes); end
    for (int k = 0; k < total; k++) begin
      logic [31:0] a;
      a = c.base + 32'(k % 64) * c.stride0 + 32'(k / 64) * c.stride1;
      checks++;
      if (!mem.exists(a) || !mem.exists(a + 8) || {mem[a + 8], mem[a]} != line_of(k)) begin
        failures++; if (failures < 5) $display("line %0d wrong", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
