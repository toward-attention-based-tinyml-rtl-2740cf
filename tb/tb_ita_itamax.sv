// tb_ita_itamax: self-checking test of the streaming base-2 softmax unit.
//
// Each round clears the unit, feeds a 64 x 64 score matrix in the order the
// engine produces it (N = 16 columns per cycle, column group outer, row
// inner), starts the inversion (DI) and checks that it takes exactly one
// cycle per row (64 cycles), then checks EN on random value vectors against
// the integer reference ita_ref_pkg::itamax_row for every row. The score
// rows use a shrinking random range so that both the running maximum update
// (later groups raising the maximum) and sum saturation are exercised.
module tb_ita_itamax;
  import ita_pkg::*;
  import ita_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 clear, da_valid, di_start, di_busy;
  logic [5:0]           da_row, en_row;
  logic [N-1:0][7:0]    da_x;
  logic [M-1:0][7:0]    en_x, en_y;

  int checks = 0, failures = 0;

  ita_itamax dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .da_valid_i(da_valid), .da_row_i(da_row), .da_x_i(da_x),
    .di_start_i(di_start), .di_busy_o(di_busy),
    .en_row_i(en_row), .en_x_i(en_x), .en_y_o(en_y)
  );

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial run();

  task automatic run();
    itamax_row ref_rows [M];
    int v [];
    int cyc, range_lo;
    clear = 0; da_valid = 0; di_start = 0; da_row = 0; en_row = 0; da_x = '0; en_x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      range_lo = (round < 3) ? -128 : 60;   // wide spread / near-equal scores
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (ref_rows[r]) ref_rows[r] = new();
      for (int g = 0; g < M / N; g++) begin
        for (int i = 0; i < M; i++) begin
          v = new[N];
          for (int j = 0; j < N; j++) begin
            v[j] = range_lo + int'($urandom_range(0, 127 - range_lo));
            if (round == 1 && g == 3) v[j] = 127 - int'($urandom_range(0, 7)); // late max
            da_x[j] = 8'(v[j]);
          end
          ref_rows[i].add(v);
          da_valid = 1; da_row = 6'(i);
          @(negedge clk);
        end
      end
      da_valid = 0;
      di_start = 1; @(negedge clk); di_start = 0;
      cyc = 0;
      while (di_busy) begin cyc++; @(negedge clk); end
      checks++;
      if (cyc != M) begin failures++; $display("DI took %0d cycles, expected %0d", cyc, M); end
      foreach (ref_rows[r]) ref_rows[r].invert();
      for (int t = 0; t < 2 * M; t++) begin
        int r;
        r = t % M;
        en_row = 6'(r);
        for (int k = 0; k < M; k++) en_x[k] = 8'($urandom);
        #1;
        for (int k = 0; k < M; k++) begin
          int e;
          e = ref_rows[r].norm($signed(en_x[k]));
          checks++;
          if (int'(en_y[k]) != e) begin
            failures++;
            if (failures < 10) $display("round %0d row %0d k %0d: got %0d exp %0d", round, r, k, en_y[k], e);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
