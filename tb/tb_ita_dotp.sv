// tb_ita_dotp: the 16 x 64 dot product units at full size with random and
// extreme int8 vectors, against an integer reference.
module tb_ita_dotp;
  localparam int NU = 16, VL = 64, DW = 26;
  logic [VL-1:0][7:0] a;
  logic [NU-1:0][VL-1:0][7:0] b;
  logic [NU-1:0][DW-1:0] res;
  int checks = 0, failures = 0;

  ita_dotp #(.NU(NU), .VL(VL), .DW(DW)) dut (.a_i(a), .b_i(b), .res_o(res));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial run();

  task automatic run();
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < VL; k++) a[k] = (n == 0) ? 8'h80 : (n == 1 ? 8'h7F : 8'($urandom));
      for (int u = 0; u < NU; u++) for (int k = 0; k < VL; k++)
        b[u][k] = (n == 0) ? 8'h80 : (n == 1 ? 8'h80 : 8'($urandom));
      #1;
      for (int u = 0; u < NU; u++) begin
        int e = 0;
        for (int k = 0; k < VL; k++) e += int'($signed(a[k])) * int'($signed(b[u][k]));
        checks++;
        if ($signed(res[u]) != e) begin failures++; $display("unit %0d: %0d vs %0d", u, $signed(res[u]), e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
