// tb_ita_sum_buffer: full-size partial sum buffer (256 x 16 x 26 bit).
// Random writes and reads with simultaneous read/write of different entries;
// checks data and one-cycle read latency against a model.
module tb_ita_sum_buffer;
  localparam int E = 256, NU = 16, DW = 26;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re, we; logic [7:0] ra, wa; logic [NU-1:0][DW-1:0] rd, wd;
  logic [NU*DW-1:0] model [E];
  int checks = 0, failures = 0;

  ita_sum_buffer #(.NU(NU), .ENTRIES(E), .DW(DW)) dut (.clk_i(clk), .rd_en_i(re), .rd_addr_i(ra),
    .rd_data_o(rd), .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    re = 0; we = 0; ra = 0; wa = 0; wd = '0;
    for (int e = 0; e < E; e++) begin
      @(negedge clk); we = 1; wa = 8'(e);
      for (int u = 0; u < NU; u++) wd[u] = DW'($urandom);
      model[e] = wd;
    end
    for (int n = 0; n < 2000; n++) begin
      logic [NU*DW-1:0] exp;
      @(negedge clk);
      re = 1; ra = 8'($urandom); we = $urandom % 2; wa = 8'($urandom);
      if (wa == ra) wa = wa + 1;
      for (int u = 0; u < NU; u++) wd[u] = DW'($urandom);
      exp = model[ra];
      if (we) model[wa] = wd;
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (rd != exp) begin failures++; $display("entry %0d wrong", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
