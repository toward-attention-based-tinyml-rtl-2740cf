// tb_hwpe_fifo: random pushes and pops against a queue model, including
// simultaneous push and pop on a full FIFO; checks order, count and flags.
module tb_hwpe_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vi, ro, vo, ri; logic [15:0] di, dq; logic [2:0] cnt;
  int checks = 0, failures = 0, full_seen = 0;
  logic [15:0] q [$];

  hwpe_fifo #(.WIDTH(16), .DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(1'b0),
    .valid_i(vi), .ready_o(ro), .data_i(di), .valid_o(vo), .ready_i(ri), .data_o(dq), .count_o(cnt));

  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    vi = 0; ri = 0; di = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      vi = ($urandom % 4) != 0; ri = ($urandom % 3) == 0 || n > 4000; di = 16'($urandom);
      #4;
      checks++;
      if (cnt != 3'(q.size()) || vo != (q.size() != 0) || (vo && dq != q[0])) begin
        failures++; $display("mismatch cnt=%0d model=%0d", cnt, q.size());
      end
      if (q.size() == 4) begin
        full_seen++;
        checks++; if (ro != ri) begin failures++; $display("full ready wrong"); end
      end
      @(posedge clk);
      if (vo && ri) void'(q.pop_front());
      if (vi && ro) q.push_back(di);
    end
    checks++; if (full_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
