// tb_ita_weight_buffer: small buffer (4 rows of 8 bytes). A random-rate
// writer streams numbered weight sets, a random-rate reader uses and
// releases them. Checks that the reader sees every set complete and in
// order, that the writer is stopped only when both banks are full, and that
// the next set is loaded while the current one is in use.
module tb_ita_weight_buffer;
  localparam int NU = 4, VL = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wv, wr, rv, rel;
  logic [VL-1:0][7:0] wd;
  logic [NU-1:0][VL-1:0][7:0] rd;
  int checks = 0, failures = 0, overlap = 0;
  int wrow = 0, rset = 0;

  ita_weight_buffer #(.NU(NU), .VL(VL)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(1'b0),
    .wr_valid_i(wv), .wr_ready_o(wr), .wr_data_i(wd), .rd_valid_o(rv), .rd_release_i(rel), .rd_data_o(rd));

  function automatic logic [7:0] val(input int set, input int row, input int k);
    return 8'(set * 37 + row * 11 + k * 3);
  endfunction

  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    wv = 0; rel = 0; wd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (rset < 200) begin
      @(negedge clk);
      wv = ($urandom % 3) != 0;
      for (int k = 0; k < VL; k++) wd[k] = val(wrow / NU, wrow % NU, k);
      rel = rv && ($urandom % 3 == 0);
      #4;
      if (rv) begin
        for (int r = 0; r < NU; r++) for (int k = 0; k < VL; k++) begin
          checks++;
          if (rd[r][k] != val(rset, r, k)) begin failures++; $display("set %0d row %0d", rset, r); end
        end
        if (wv && wr) overlap++;
      end
      checks++;
      if (wr != !(wrow - rset * NU >= 2 * NU)) begin failures++; $display("ready wrong"); end
      @(posedge clk);
      if (wv && wr) wrow++;
      if (rel) rset++;
    end
    checks++; if (overlap == 0) begin failures++; $display("no load during use"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
