// tb_ita_engine: self-checking test of the ITA datapath and sequencer.
//
// Behavioural stream models feed the engine's input, weight and bias
// streams and drain its output stream, each with a programmable chance of
// a bubble (random valid/ready). Scenarios:
//   1. GEMM over two K-tiles (first_k + bias, then last_k), ReLU, random
//      bubbles: partial sums must survive in the sum buffer.
//   2. Single-tile GEMM with ideal streams: start-to-done latency must be
//      256 issue cycles plus a short drain (paper: full utilisation when
//      operands are available), and no stall cycle may be reported.
//   3. Q x K^T with ITAMax clear + invert, then A x V using the QK output as
//      input through ITAMax EN, with random bubbles; i-GeLU tile.
// Every output byte is compared with an integer reference (ita_ref_pkg).
module tb_ita_engine;
  import ita_pkg::*;
  import ita_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, stall;
  ita_task_t tsk;
  logic in_valid, in_ready, w_valid, w_ready, b_valid, b_ready, out_valid, out_ready;
  logic [M-1:0][7:0]  in_data, w_data;
  logic [N-1:0][31:0] b_data;
  logic [N-1:0][7:0]  out_data;

  ita_engine dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .task_i(tsk), .busy_o(busy), .done_o(done),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_data_i(w_data),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_data_i(b_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data),
    .stall_o(stall)
  );

  int checks = 0, failures = 0;
  int bubble = 0;  // percent chance of a bubble per stream and cycle

  // stream sources/sink
  logic [M-1:0][7:0]  in_q [$], w_q [$];
  logic [N-1:0][31:0] b_q [$];
  logic [N-1:0][7:0]  out_got [$];
  int stall_cycles = 0;

  always @(negedge clk) begin
    in_valid = (in_q.size() > 0) && ($urandom_range(0, 99) >= bubble);
    in_data  = (in_q.size() > 0) ? in_q[0] : '0;
    w_valid  = (w_q.size() > 0) && ($urandom_range(0, 99) >= bubble);
    w_data   = (w_q.size() > 0) ? w_q[0] : '0;
    b_valid  = (b_q.size() > 0) && ($urandom_range(0, 99) >= bubble);
    b_data   = (b_q.size() > 0) ? b_q[0] : '0;
    out_ready = ($urandom_range(0, 99) >= bubble);
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (w_valid && w_ready) void'(w_q.pop_front());
    if (b_valid && b_ready) void'(b_q.pop_front());
    if (out_valid && out_ready) out_got.push_back(out_data);
    if (stall) stall_cycles++;
  end

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // operand matrices
  int A [64][64], W [64][64], bias [64];

  task automatic rand_mat(output int m [64][64], input int lo, input int hi);
    foreach (m[i, j]) m[i][j] = lo + int'($urandom_range(0, hi - lo));
  endtask

  // queue one K-tile: input rows repeated per group, N weight rows per
  // group, one bias line per group when used
  task automatic feed(input int a [64][64], input int w [64][64], input bit with_bias);
    for (int g = 0; g < GROUPS; g++) begin
      for (int n = 0; n < N; n++) begin
        logic [M-1:0][7:0] r;
        for (int k = 0; k < M; k++) r[k] = 8'(w[g * N + n][k]);
        w_q.push_back(r);
      end
      if (with_bias) begin
        logic [N-1:0][31:0] bl;
        for (int n = 0; n < N; n++) bl[n] = 32'(bias[g * N + n]);
        b_q.push_back(bl);
      end
      for (int i = 0; i < M; i++) begin
        logic [M-1:0][7:0] r;
        for (int k = 0; k < M; k++) r[k] = 8'(a[i][k]);
        in_q.push_back(r);
      end
    end
  endtask

  task automatic run_task(input ita_task_t t, output int cycles);
    @(negedge clk);
    tsk = t; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // compare collected output lines with exp (line order: group, row)
  task automatic check_out(input string name, input int exp [64][64]);
    checks++;
    if (out_got.size() != M * GROUPS) begin
      failures++; $display("%s: %0d output lines", name, out_got.size());
      return;
    end
    for (int g = 0; g < GROUPS; g++)
      for (int i = 0; i < M; i++)
        for (int n = 0; n < N; n++) begin
          checks++;
          if ($signed(out_got[g * M + i][n]) != exp[i][g * N + n]) begin
            failures++;
            if (failures < 10) $display("%s: [%0d][%0d] got %0d exp %0d", name, i, g * N + n,
                                        $signed(out_got[g * M + i][n]), exp[i][g * N + n]);
          end
        end
    out_got.delete();
  endtask

  function automatic ita_task_t base_task();
    ita_task_t t;
    t = '0;
    t.op = OP_GEMM; t.act = ACT_IDENTITY; t.first_k = 1; t.last_k = 1;
    t.rq.mult = 8'd1; t.rq.shift = 5'd7;
    return t;
  endfunction

  initial run();

  task automatic run();
    ita_task_t t;
    int cyc;
    int A2 [64][64], W2 [64][64], exp [64][64], S [64][64], V [64][64];
    longint acc;
    itamax_row rows [64];
    start = 0; tsk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: two K-tiles, bias, ReLU, bubbles ----
    bubble = 30;
    rand_mat(A, -128, 127); rand_mat(W, -128, 127); rand_mat(A2, -128, 127); rand_mat(W2, -128, 127);
    foreach (bias[j]) bias[j] = int'($urandom_range(0, 1 << 20)) - (1 << 19);
    t = base_task(); t.act = ACT_RELU; t.bias_en = 1; t.last_k = 0; t.rq.mult = 8'd37; t.rq.shift = 5'd16;
    feed(A, W, 1);
    run_task(t, cyc);
    checks++;
    if (out_got.size() != 0) begin failures++; $display("first K-tile wrote output"); end
    t.first_k = 0; t.last_k = 1;
    feed(A2, W2, 0);
    run_task(t, cyc);
    foreach (exp[i, j]) begin
      acc = bias[j];
      for (int k = 0; k < 64; k++) acc += A[i][k] * W[j][k] + A2[i][k] * W2[j][k];
      exp[i][j] = ref_act(ref_requant(acc, 37, 16), 1, 0, 0, 0, 1, 0);
    end
    check_out("gemm2k", exp);

    // ---- 2: ideal streams, latency ----
    bubble = 0;
    rand_mat(A, -128, 127); rand_mat(W, -128, 127);
    t = base_task(); t.rq.mult = 8'd5; t.rq.shift = 5'd12;
    feed(A, W, 0);
    repeat (40) @(negedge clk);  // let both weight buffer banks fill (2 x N rows)
    stall_cycles = 0;
    run_task(t, cyc);
    checks++;
    if (cyc < 256 || cyc > 256 + 8) begin failures++; $display("tile latency %0d cycles", cyc); end
    checks++;
    if (stall_cycles != 0) begin failures++; $display("%0d stall cycles with ideal streams", stall_cycles); end
    foreach (exp[i, j]) begin
      acc = 0;
      for (int k = 0; k < 64; k++) acc += A[i][k] * W[j][k];
      exp[i][j] = ref_requant(acc, 5, 12);
    end
    check_out("gemm_ideal", exp);

    // ---- 3: QK then AV, bubbles ----
    bubble = 25;
    rand_mat(A, -128, 127); rand_mat(W, -128, 127);
    t = base_task(); t.op = OP_QK; t.max_clear = 1; t.max_invert = 1; t.rq.mult = 8'd3; t.rq.shift = 5'd12;
    feed(A, W, 0);
    run_task(t, cyc);
    foreach (rows[i]) rows[i] = new();
    foreach (S[i, j]) begin
      acc = 0;
      for (int k = 0; k < 64; k++) acc += A[i][k] * W[j][k];
      S[i][j] = ref_requant(acc, 3, 12);
    end
    for (int g = 0; g < GROUPS; g++)
      for (int i = 0; i < 64; i++) begin
        int v [] = new[N];
        for (int n = 0; n < N; n++) v[n] = S[i][g * N + n];
        rows[i].add(v);
      end
    foreach (rows[i]) rows[i].invert();
    check_out("qk", S);
    rand_mat(V, -128, 127);
    t = base_task(); t.op = OP_AV; t.rq.mult = 8'd1; t.rq.shift = 5'd7;
    feed(S, V, 0);
    run_task(t, cyc);
    foreach (exp[i, j]) begin
      acc = 0;
      for (int k = 0; k < 64; k++) acc += rows[i].norm(S[i][k]) * V[j][k];
      exp[i][j] = ref_requant(acc, 1, 7);
    end
    check_out("av", exp);

    // ---- 4: i-GeLU tile ----
    rand_mat(A, -128, 127); rand_mat(W, -128, 127);
    t = base_task(); t.act = ACT_GELU; t.rq.mult = 8'd3; t.rq.shift = 5'd12;
    t.gelu_b = -8'sd29; t.gelu_c = D'(841); t.gelu_one = D'(841); t.act_rq.mult = 8'd39; t.act_rq.shift = 5'd16;
    feed(A, W, 0);
    run_task(t, cyc);
    foreach (exp[i, j]) begin
      acc = 0;
      for (int k = 0; k < 64; k++) acc += A[i][k] * W[j][k];
      exp[i][j] = ref_act(ref_requant(acc, 3, 12), 2, -29, 841, 841, 39, 16);
    end
    check_out("gelu", exp);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
