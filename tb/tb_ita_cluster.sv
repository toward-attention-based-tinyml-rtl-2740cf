// tb_ita_cluster: end-to-end test of the accelerator cluster at its default
// size (32 x 4 KiB TCDM, 9 core ports, 8 DMA ports, 16 HWPE ports, N = 16,
// M = 64).
//
// A behavioural DMA loads operands into the L1 through the DMA ports, the
// accelerator is programmed over the configuration AXI port exactly as
// software would (ACQUIRE, job registers, TRIGGER), and results are read
// back through the DMA ports and compared byte by byte with a reference
// computed here. Behavioural cores issue random reads to create bank
// conflicts during some tasks. Workloads:
//   1. GEMM with a 128-long inner dimension (two K-tiles through the partial
//      sum buffer) plus bias, both tasks queued in the two contexts;
//   2. GEMM with ReLU and with i-GeLU, under core traffic;
//   3. one attention head with sequence length 128: two Q x K^T tiles
//      (ITAMax DA, then DI) and A x V over two K-tiles (ITAMax EN).
// Each mechanism is counted and must have happened at least once. The
// cycle count of an uncontended tile is checked against the 256-cycle
// minimum (M * M / N issue cycles).
module tb_ita_cluster;
  import ita_pkg::*;
  import ita_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tcdm_req_t [N_CORES-1:0]     core_req;
  tcdm_rsp_t [N_CORES-1:0]     core_rsp;
  tcdm_req_t [N_DMA_PORTS-1:0] dma_req;
  tcdm_rsp_t [N_DMA_PORTS-1:0] dma_rsp;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  logic evt, busy, stall;

  ita_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_rsp_o(core_rsp),
    .dma_req_i(dma_req), .dma_rsp_o(dma_rsp),
    .cfg_axi_req_i(axi_req), .cfg_axi_rsp_o(axi_rsp),
    .evt_o(evt), .hwpe_busy_o(busy), .hwpe_stall_o(stall)
  );

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  int evt_cnt = 0, stall_cycles = 0, core_conflicts = 0;
  int n_ctx_full = 0, n_psum = 0, n_bias = 0, n_relu = 0, n_gelu = 0;
  int n_qk = 0, n_di = 0, n_av = 0, n_identity = 0;
  bit core_traffic = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (evt && rst_n) evt_cnt <= evt_cnt + 1;
    if (stall && rst_n) stall_cycles <= stall_cycles + 1;
  end

  initial begin
    #(10 * 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------- software-visible memory image (reference copy) -------------
  byte unsigned img [logic [31:0]];

  task automatic dma_write_line(input logic [31:0] addr, input logic [511:0] d);
    logic [7:0] pend = '1;
    while (pend != 0) begin
      @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        dma_req[p].req   = pend[p];
        dma_req[p].addr  = addr + 32'(8 * p);
        dma_req[p].we    = 1'b1;
        dma_req[p].be    = '1;
        dma_req[p].wdata = d[64 * p +: 64];
      end
      #4;
      for (int p = 0; p < 8; p++) if (dma_rsp[p].gnt) pend[p] = 1'b0;
    end
    @(negedge clk);
    dma_req = '0;
  endtask

  task automatic dma_read_line(input logic [31:0] addr, output logic [511:0] d);
    logic [7:0] pend = '1, got = '0;
    while (got != '1) begin
      @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        dma_req[p].req  = pend[p];
        dma_req[p].addr = addr + 32'(8 * p);
        dma_req[p].we   = 1'b0;
        dma_req[p].be   = '1;
      end
      #4;
      for (int p = 0; p < 8; p++) begin
        if (dma_rsp[p].rvalid && !got[p] && !pend[p]) begin
          d[64 * p +: 64] = dma_rsp[p].rdata;
          got[p] = 1'b1;
        end
        if (dma_req[p].req && dma_rsp[p].gnt) pend[p] = 1'b0;
      end
    end
    @(negedge clk);
    dma_req = '0;
  endtask

  // copy a rows x cols byte matrix from img to L1 (64-byte lines)
  task automatic load_region(input logic [31:0] base, input int bytes);
    for (int a = 0; a < bytes; a += 64) begin
      logic [511:0] d;
      for (int k = 0; k < 64; k++) d[8 * k +: 8] = img.exists(base + a + k) ? img[base + a + k] : 8'h00;
      dma_write_line(base + 32'(a), d);
    end
  endtask

  // ------------- AXI configuration -------------
  task automatic axi_write(input logic [31:0] addr, input logic [31:0] data);
    @(negedge clk);
    axi_req.aw_valid = 1'b1; axi_req.aw_addr = addr; axi_req.aw_id = 4'd3;
    axi_req.aw_len = 0; axi_req.aw_size = 3'd2; axi_req.aw_burst = 2'b01;
    axi_req.w_valid = 1'b1; axi_req.w_last = 1'b1;
    axi_req.w_data = addr[2] ? {data, 32'h0} : {32'h0, data};
    axi_req.w_strb = addr[2] ? 8'hF0 : 8'h0F;
    axi_req.b_ready = 1'b1;
    #4;
    while (!axi_rsp.aw_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    axi_req.aw_valid = 1'b0; axi_req.w_valid = 1'b0;
    #4;
    while (!axi_rsp.b_valid) begin @(negedge clk); #4; end
    checks++;
    if (axi_rsp.b_resp != 2'b00 || axi_rsp.b_id != 4'd3) begin
      failures++; $display("AXI write response wrong");
    end
    @(negedge clk);
  endtask

  task automatic axi_read(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    axi_req.ar_valid = 1'b1; axi_req.ar_addr = addr; axi_req.ar_id = 4'd5;
    axi_req.ar_len = 0; axi_req.ar_size = 3'd2; axi_req.ar_burst = 2'b01;
    axi_req.r_ready = 1'b1;
    #4;
    while (!axi_rsp.ar_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    axi_req.ar_valid = 1'b0;
    #4;
    while (!axi_rsp.r_valid) begin @(negedge clk); #4; end
    data = addr[2] ? axi_rsp.r_data[63:32] : axi_rsp.r_data[31:0];
    @(negedge clk);
  endtask

  typedef struct {
    int in_base, in_stride, w_base, w_stride, bias_base, out_base, out_stride;
    int op, act, first_k, last_k, bias_en, max_clear, max_invert;
    int mult, shift, gb, gc, gone, amult, ashift;
  } task_s;

  task automatic program_task(input task_s t);
    logic [31:0] r [13];
    logic [31:0] id;
    r[0] = t.in_base; r[1] = t.in_stride; r[2] = t.w_base; r[3] = t.w_stride;
    r[4] = t.bias_base; r[5] = t.out_base; r[6] = t.out_stride;
    r[7] = 32'(t.op) | 32'(t.act << 2) | 32'(t.first_k << 4) | 32'(t.last_k << 5) |
           32'(t.bias_en << 6) | 32'(t.max_clear << 7) | 32'(t.max_invert << 8);
    r[8] = 32'(t.mult) | 32'(t.shift << 8);
    r[9] = 32'(t.gb) & 32'hFF; r[10] = t.gc; r[11] = t.gone;
    r[12] = 32'(t.amult) | 32'(t.ashift << 8);
    axi_read(32'h04, id);
    while (id == 32'hFFFF_FFFF) begin
      n_ctx_full++;
      repeat (20) @(negedge clk);
      axi_read(32'h04, id);
    end
    for (int k = 0; k < 13; k++) axi_write(32'h40 + 32'(4 * k), r[k]);
    axi_write(32'h00, 32'h0);
    if (t.first_k == 0) n_psum++;
    if (t.bias_en && t.first_k) n_bias++;
    if (t.op == 1) n_qk++;
    if (t.op == 1 && t.max_invert) n_di++;
    if (t.op == 2) n_av++;
    if (t.last_k && t.act == 1) n_relu++;
    if (t.last_k && t.act == 2) n_gelu++;
    if (t.last_k && t.act == 0) n_identity++;
  endtask

  task automatic wait_events(input int target);
    while (evt_cnt < target) @(negedge clk);
  endtask

  // ------------- behavioural cores: random reads -------------
  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    initial begin
      core_req[c] = '0;
      forever begin
        @(negedge clk);
        if (core_req[c].req) begin
          if (core_rsp[c].gnt) core_req[c].req = 1'b0;
          else core_conflicts++;
        end
        if (!core_req[c].req && core_traffic && ($urandom % 2 == 0)) begin
          core_req[c].req  = 1'b1;
          core_req[c].we   = 1'b0;
          core_req[c].be   = '1;
          core_req[c].addr = ($urandom % 16384) * 8;
        end
        #4;
        if (core_req[c].req && core_rsp[c].gnt) ; // granted at next edge
      end
    end
  end

  // ------------- reference helpers -------------
  function automatic int sb(input logic [31:0] a);
    return img.exists(a) ? int'($signed(img[a])) : 0;
  endfunction

  // reference GEMM over K-tiles with bias, requant, activation
  task automatic ref_gemm(input task_s t, input int ktiles, input int in_kstep, input int w_kstep,
                          output int res [64][64]);
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        longint acc = 0;
        for (int kt = 0; kt < ktiles; kt++)
          for (int k = 0; k < 64; k++)
            acc += sb(t.in_base + kt * in_kstep + i * t.in_stride + k) *
                   sb(t.w_base + kt * w_kstep + j * t.w_stride + k);
        if (t.bias_en) begin
          int bw = int'({img[t.bias_base + 4*j + 2], img[t.bias_base + 4*j + 1], img[t.bias_base + 4*j]});
          bw = (bw << 8) >>> 8;
          acc += bw;
        end
        res[i][j] = ref_act(ref_requant(acc, t.mult, t.shift), t.act, t.gb, t.gc, t.gone,
                            t.amult, t.ashift);
      end
  endtask

  task automatic check_tile(input string name, input int base, input int stride, input int exp [64][64]);
    int bad = 0;
    for (int i = 0; i < 64; i++) begin
      logic [511:0] d;
      dma_read_line(base + i * stride, d);
      for (int j = 0; j < 64; j++) begin
        int got = int'($signed(d[8 * j +: 8]));
        checks++;
        img[base + i * stride + j] = d[8 * j +: 8];
        if (got != exp[i][j]) begin
          failures++;
          if (bad++ < 5) $display("%s mismatch [%0d][%0d] got %0d exp %0d", name, i, j, got, exp[i][j]);
        end
      end
    end
    $display("%s checked, %0d mismatches", name, bad);
  endtask

  function automatic void fill(input int base, input int bytes, input int range);
    for (int a = 0; a < bytes; a++) img[base + a] = 8'(($urandom % (2 * range + 1)) - range);
  endfunction

  // ------------- main sequence -------------
  initial run();

  task automatic run();
    task_s t0, t1, tr, tg, tq0, tq1, ta0, ta1;
    int exp [64][64];
    int t_start, t_tile;
    logic [31:0] st;
    dma_req = '0; axi_req = '0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // ---------- 1. GEMM, K = 128, bias, two queued contexts ----------
    fill(32'h0000, 8192, 20);             // X  64 x 128
    fill(32'h2000, 8192, 20);             // W  64 x 128
    for (int j = 0; j < 64; j++) begin
      int b = int'($urandom % 4001) - 2000;
      for (int k = 0; k < 4; k++) img[32'h4000 + 4*j + k] = 8'(b >> (8 * k));
    end
    load_region(32'h0000, 16384);
    load_region(32'h4000, 256);
    t0 = '{in_base:'h0000, in_stride:128, w_base:'h2000, w_stride:128, bias_base:'h4000,
           out_base:'h5000, out_stride:64, op:0, act:0, first_k:1, last_k:0, bias_en:1,
           max_clear:0, max_invert:0, mult:3, shift:8, gb:0, gc:0, gone:0, amult:0, ashift:0};
    t1 = t0; t1.in_base = 'h0040; t1.w_base = 'h2040; t1.first_k = 0; t1.last_k = 1;
    program_task(t0);
    program_task(t1);
    // both contexts hold tasks now or the first already runs: try a third acquire
    axi_read(32'h04, st);
    if (st == 32'hFFFF_FFFF) n_ctx_full++;
    axi_read(32'h08, st);
    $display("status after queueing two tasks: %h", st);
    wait_events(2);
    begin
      task_s tb = t0; tb.last_k = 1;
      ref_gemm(tb, 2, 64, 64, exp);
    end
    check_tile("gemm_k128_bias", 'h5000, 64, exp);

    // ---------- uncontended tile timing ----------
    begin
      task_s tt = t0; tt.first_k = 1; tt.last_k = 1; tt.out_base = 'h11000;
      program_task(tt);
      t_start = int'(cycle);
      wait_events(3);
      t_tile = int'(cycle) - t_start;
      $display("single tile: %0d cycles from trigger to event", t_tile);
      checks++;
      if (t_tile < 256 || t_tile > 256 + 120) begin
        failures++; $display("tile latency %0d out of [256, 376]", t_tile);
      end
    end

    // ---------- 2. ReLU and GeLU under core traffic ----------
    core_traffic = 1;
    tr = t0; tr.first_k = 1; tr.last_k = 1; tr.bias_en = 0; tr.act = 1; tr.out_base = 'hF000;
    tr.mult = 5; tr.shift = 9;
    program_task(tr);
    // i-GeLU with b = -29 (x/sqrt2 scale 1/16), c = one = b^2 = 841, output
    // requantiser 39/2^16 ~ 1/(2c) so that GeLU(large x) ~ x.
    tg = tr; tg.act = 2; tg.out_base = 'h10000; tg.gb = -29; tg.gc = 841; tg.gone = 841;
    tg.amult = 39; tg.ashift = 16;
    program_task(tg);
    wait_events(5);
    core_traffic = 0;
    ref_gemm(tr, 1, 0, 0, exp);
    check_tile("gemm_relu", 'hF000, 64, exp);
    ref_gemm(tg, 1, 0, 0, exp);
    check_tile("gemm_gelu", 'h10000, 64, exp);

    // ---------- 3. attention head, S = 128, P = 64 ----------
    fill(32'h6000, 8192, 30);   // Q  128 x 64 (rows 0..63 used)
    fill(32'h8000, 8192, 30);   // K  128 x 64
    fill(32'hA000, 8192, 40);   // V^T 64 x 128
    load_region(32'h6000, 3 * 8192);
    tq0 = '{in_base:'h6000, in_stride:64, w_base:'h8000, w_stride:64, bias_base:0,
            out_base:'hC000, out_stride:128, op:1, act:0, first_k:1, last_k:1, bias_en:0,
            max_clear:1, max_invert:0, mult:1, shift:7, gb:0, gc:0, gone:0, amult:0, ashift:0};
    tq1 = tq0; tq1.w_base = 'h8000 + 64 * 64; tq1.out_base = 'hC000 + 64;
    tq1.max_clear = 0; tq1.max_invert = 1;
    ta0 = '{in_base:'hC000, in_stride:128, w_base:'hA000, w_stride:128, bias_base:0,
            out_base:'hE000, out_stride:64, op:2, act:0, first_k:1, last_k:0, bias_en:0,
            max_clear:0, max_invert:0, mult:1, shift:7, gb:0, gc:0, gone:0, amult:0, ashift:0};
    ta1 = ta0; ta1.in_base = 'hC000 + 64; ta1.w_base = 'hA000 + 64; ta1.first_k = 0; ta1.last_k = 1;
    program_task(tq0);
    program_task(tq1);
    program_task(ta0);
    program_task(ta1);
    wait_events(9);
    begin
      int qk [64][128];
      int probs [64][128];
      int tmp [64][64];
      itamax_row rows [64];
      for (int c = 0; c < 2; c++) begin
        task_s tq = (c == 0) ? tq0 : tq1;
        ref_gemm(tq, 1, 0, 0, tmp);
        for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) qk[i][c * 64 + j] = tmp[i][j];
        check_tile(c == 0 ? "qk_tile0" : "qk_tile1", 'hC000 + 64 * c, 128, tmp);
      end
      // ITAMax reference: the hardware sees tile 0 then tile 1, groups of 16
      for (int i = 0; i < 64; i++) rows[i] = new();
      for (int c = 0; c < 2; c++)
        for (int g = 0; g < 4; g++)
          for (int i = 0; i < 64; i++) begin
            int v[] = new[16];
            for (int n = 0; n < 16; n++) v[n] = qk[i][c * 64 + g * 16 + n];
            rows[i].add(v);
          end
      for (int i = 0; i < 64; i++) rows[i].invert();
      for (int i = 0; i < 64; i++)
        for (int j = 0; j < 128; j++) probs[i][j] = rows[i].norm(qk[i][j]);
      for (int i = 0; i < 64; i++)
        for (int j = 0; j < 64; j++) begin
          longint acc = 0;
          for (int k = 0; k < 128; k++) acc += probs[i][k] * sb('hA000 + j * 128 + k);
          exp[i][j] = ref_requant(acc, 1, 7);
        end
      check_tile("attention_av", 'hE000, 64, exp);
    end

    // ---------- mechanism coverage ----------
    $display("mechanisms: ctx_full=%0d psum=%0d bias=%0d identity=%0d relu=%0d gelu=%0d qk_da=%0d di=%0d av_en=%0d hwpe_stall_cycles=%0d core_conflicts=%0d tasks=%0d",
             n_ctx_full, n_psum, n_bias, n_identity, n_relu, n_gelu, n_qk, n_di, n_av,
             stall_cycles, core_conflicts, evt_cnt);
    checks++; if (n_ctx_full == 0)     begin failures++; $display("dual context never full"); end
    checks++; if (n_psum == 0)         begin failures++; $display("no partial sums"); end
    checks++; if (n_bias == 0)         begin failures++; $display("no bias"); end
    checks++; if (n_relu == 0 || n_gelu == 0 || n_identity == 0) begin failures++; $display("activation mode missing"); end
    checks++; if (n_qk == 0 || n_di == 0 || n_av == 0) begin failures++; $display("ITAMax stage missing"); end
    checks++; if (stall_cycles == 0)   begin failures++; $display("engine never stalled"); end
    checks++; if (core_conflicts == 0) begin failures++; $display("no bank conflicts"); end
    checks++; if (evt_cnt != 9)        begin failures++; $display("expected 9 task events, saw %0d", evt_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

endmodule
