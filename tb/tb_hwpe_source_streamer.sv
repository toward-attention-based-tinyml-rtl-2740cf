// tb_hwpe_source_streamer: source streamer against a TCDM model that denies
// grants at random (bank conflicts) and a consumer with random ready.
// Checks every line's content and order against the 2-D address pattern,
// and that without conflicts or back-pressure it delivers one line per
// cycle after its start-up latency.
module tb_hwpe_source_streamer;
  import ita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, valid, ready;
  stream_cfg_t cfg;
  tcdm_req_t [7:0] req;
  tcdm_rsp_t [7:0] rsp;
  logic [511:0] data;
  int checks = 0, failures = 0, deny_pct = 0, ready_pct = 100;
  int denied = 0;

  hwpe_source_streamer #(.WORDS(8), .DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .cfg_i(cfg), .busy_o(busy), .tcdm_req_o(req), .tcdm_rsp_i(rsp), .valid_o(valid), .ready_i(ready),
    .data_o(data));

  // memory: word at byte address a holds {a, ~a}
  function automatic logic [63:0] memword(input logic [31:0] a);
    return {a, ~a};
  endfunction

  always_comb for (int w = 0; w < 8; w++) rsp[w].gnt = req[w].req && (deny[w] == 0);
  logic [7:0] deny;
  always @(negedge clk) for (int w = 0; w < 8; w++) deny[w] = ($urandom % 100) < deny_pct;
  always_ff @(posedge clk) for (int w = 0; w < 8; w++) begin
    rsp[w].rvalid <= req[w].req && rsp[w].gnt;
    rsp[w].rdata  <= memword(req[w].addr);
  end
  always @(negedge clk) ready = ($urandom % 100) < ready_pct;
  always @(posedge clk) if (valid && busy && 0) ;

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run_pattern(input stream_cfg_t c, input int dp, input int rp, output int cycles);
    int n = 0, total = int'(c.len0) * int'(c.len1), t0;
    deny_pct = dp; ready_pct = rp;
    @(negedge clk); cfg = c; start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (n < total) begin
      @(posedge clk); t0++;
      if (valid && ready) begin
        logic [31:0] a;
        a = c.base + 32'(n % int'(c.len0)) * c.stride0 + 32'(n / int'(c.len0)) * c.stride1;
        for (int w = 0; w < 8; w++) begin
          checks++;
          if (data[64*w +: 64] != memword(a + 32'(8*w))) begin
            failures++; $display("line %0d word %0d wrong", n, w);
          end
        end
        n++;
      end
    end
    cycles = t0;
    @(negedge clk);
    checks++; if (valid || busy) begin failures++; $display("extra lines or still busy"); end
  endtask

  initial run();

  task automatic run();
    int cyc;
    stream_cfg_t c;
    start = 0; cfg = '0; ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    c = '{base: 32'h100, stride0: 32'd128, len0: 16'd64, stride1: 32'd64, len1: 16'd4};
    run_pattern(c, 0, 100, cyc);
    $display("256 lines without stalls in %0d cycles", cyc);
    checks++; if (cyc > 256 + 4) begin failures++; $display("throughput below one line per cycle"); end
    c = '{base: 32'h2000, stride0: 32'd64, len0: 16'd40, stride1: 32'd0, len1: 16'd3};
    run_pattern(c, 30, 60, cyc);
    $display("120 lines with conflicts in %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
