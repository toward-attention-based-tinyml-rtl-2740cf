// tb_ita_accumulator: random dot products, biases and partial sums with all
// combinations of bias/partial-sum enables and random requantisers, against
// an integer reference; includes saturation at both ends.
module tb_ita_accumulator;
  import ita_pkg::*;
  import ita_ref_pkg::*;
  localparam int NU = 16;
  logic [NU-1:0][D-1:0] dot, psum, acc;
  logic [NU-1:0][BIAS_W-1:0] bias;
  logic ab, ap; requant_t rq;
  logic [NU-1:0][7:0] q;
  int checks = 0, failures = 0, sat = 0;

  ita_accumulator #(.NU(NU)) dut (.dot_i(dot), .bias_i(bias), .psum_i(psum), .add_bias_i(ab),
    .add_psum_i(ap), .rq_i(rq), .acc_o(acc), .q_o(q));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial run();

  task automatic run();
    for (int n = 0; n < 2000; n++) begin
      ab = $urandom % 2; ap = $urandom % 2;
      rq.mult = 8'($urandom); rq.shift = 5'($urandom % 24);
      for (int u = 0; u < NU; u++) begin
        dot[u]  = D'(int'($urandom % 2000000) - 1000000);
        psum[u] = D'(int'($urandom % 8000000) - 4000000);
        bias[u] = BIAS_W'($urandom);
      end
      #1;
      for (int u = 0; u < NU; u++) begin
        longint e = longint'($signed(dot[u]));
        int eq;
        if (ab) e += longint'($signed(bias[u]));
        if (ap) e += longint'($signed(psum[u]));
        e = (e << 38) >>> 38;  // D-bit wrap
        eq = ref_requant(e, int'(rq.mult), int'(rq.shift));
        if (eq == 127 || eq == -128) sat++;
        checks += 2;
        if (longint'($signed(acc[u])) != e) begin failures++; $display("acc %0d vs %0d", $signed(acc[u]), e); end
        if (int'($signed(q[u])) != eq) begin failures++; $display("q %0d vs %0d", $signed(q[u]), eq); end
      end
    end
    checks++; if (sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
