// tb_ita_activation: every int8 input in all three modes (Identity, ReLU,
// i-GeLU) with a few i-GeLU parameter sets, against the integer reference.
// Also checks two properties of GeLU independent of the reference: large
// positive inputs pass almost unchanged and large negative inputs go to ~0.
module tb_ita_activation;
  import ita_pkg::*;
  import ita_ref_pkg::*;
  localparam int NU = 16;
  logic [NU-1:0][7:0] q, y;
  ita_act_e mode;
  logic signed [7:0] gb; logic signed [D-1:0] gc, gone; requant_t rq;
  int checks = 0, failures = 0;

  ita_activation #(.NU(NU)) dut (.q_i(q), .mode_i(mode), .gelu_b_i(gb), .gelu_c_i(gc),
    .gelu_one_i(gone), .rq_i(rq), .y_o(y));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial run();

  task automatic run();
    int bs [3] = '{-29, -60, -14};
    for (int p = 0; p < 3; p++) begin
      gb = 8'(bs[p]);
      gc = D'(bs[p] * bs[p]);             // L = 0 at q = 0 ...
      gone = gc;                          // ... and erf(large) = 1 = c
      rq.mult = 8'd1; rq.shift = 5'(2 * ($clog2(-bs[p])) - 1);
      for (int m = 0; m < 3; m++) begin
        mode = ita_act_e'(m);
        for (int base = -128; base < 128; base += NU) begin
          for (int u = 0; u < NU; u++) q[u] = 8'(base + u);
          #1;
          for (int u = 0; u < NU; u++) begin
            int e = ref_act(base + u, m, bs[p], int'($signed(gc)), int'($signed(gone)),
                            int'(rq.mult), int'(rq.shift));
            checks++;
            if (int'($signed(y[u])) != e) begin
              failures++; $display("mode %0d q %0d: %0d vs %0d", m, base + u, $signed(y[u]), e);
            end
          end
        end
      end
    end
    // qualitative GeLU shape with b = -29 (S = 1/16 after the sqrt(2) scaling)
    mode = ACT_GELU; gb = -8'sd29; gc = D'(841); gone = D'(841); rq.mult = 8'd39; rq.shift = 5'd16;
    for (int u = 0; u < NU; u++) q[u] = (u < 8) ? 8'(120 - u) : 8'(-120 + u);
    #1;
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (u < 8 && ($signed(y[u]) < $signed(q[u]) - 8'sd2 || $signed(y[u]) > $signed(q[u]) + 8'sd2)) begin
        failures++; $display("GeLU(%0d) = %0d", $signed(q[u]), $signed(y[u]));
      end
      if (u >= 8 && ($signed(y[u]) > 8'sd2 || $signed(y[u]) < -8'sd2)) begin
        failures++; $display("GeLU(-large) = %0d", $signed(y[u]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
