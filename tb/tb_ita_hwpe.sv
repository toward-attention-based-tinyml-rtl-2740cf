// tb_ita_hwpe: self-checking test of the ITA HWPE (controller, streamers,
// port multiplexer and engine) against a behavioural memory.
//
// The memory model answers the 16 TCDM ports of the HWPE: each request is
// granted with 70 % probability in its cycle (modelling bank conflicts) and
// read data arrive one cycle after the grant. Tasks are programmed through
// the peripheral port exactly as a core would: ACQUIRE, job registers,
// TRIGGER. Checks: two queued tasks fill both contexts (ACQUIRE returns all
// ones), STATUS reports busy, one event per task, DONE_CNT, and every
// output byte of a 64 x 128 (K) GEMM with bias and of a ReLU GEMM against
// an integer reference.
module tb_ita_hwpe;
  import ita_pkg::*;
  import ita_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  per_req_t                per_req;
  per_rsp_t                per_rsp;
  tcdm_req_t [N_HWPE-1:0]  treq;
  tcdm_rsp_t [N_HWPE-1:0]  trsp;
  logic evt, busy, stall;

  ita_hwpe dut (
    .clk_i(clk), .rst_ni(rst_n), .per_req_i(per_req), .per_rsp_o(per_rsp),
    .tcdm_req_o(treq), .tcdm_rsp_i(trsp), .evt_o(evt), .busy_o(busy), .stall_o(stall)
  );

  int checks = 0, failures = 0, evt_cnt = 0, denied = 0;
  logic [7:0] mem [131072];

  // behavioural TCDM
  logic [N_HWPE-1:0] gnt_sel;
  always @(negedge clk) for (int p = 0; p < N_HWPE; p++) gnt_sel[p] = ($urandom_range(0, 99) < 70);
  always_comb for (int p = 0; p < N_HWPE; p++) trsp[p].gnt = treq[p].req && gnt_sel[p];
  always @(posedge clk) begin
    for (int p = 0; p < N_HWPE; p++) begin
      trsp[p].rvalid <= treq[p].req && trsp[p].gnt;
      if (treq[p].req && trsp[p].gnt) begin
        for (int b = 0; b < 8; b++) begin
          trsp[p].rdata[8*b +: 8] <= mem[(treq[p].addr & ~32'h7) + 32'(b)];
          if (treq[p].we && treq[p].be[b]) mem[(treq[p].addr & ~32'h7) + 32'(b)] = treq[p].wdata[8*b +: 8];
        end
      end
      if (treq[p].req && !trsp[p].gnt) denied++;
    end
    if (rst_n && evt) evt_cnt++;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic per_access(input logic we, input logic [31:0] addr, input logic [31:0] wd,
                            output logic [31:0] rd);
    @(negedge clk);
    per_req.req = 1; per_req.we = we; per_req.addr = addr; per_req.be = '1; per_req.wdata = wd;
    #1;
    while (!per_rsp.gnt) @(negedge clk);
    @(negedge clk);
    per_req.req = 0;
    rd = per_rsp.rdata;
  endtask

  function automatic int sb(input int a);
    return int'($signed(mem[a]));
  endfunction

  // job registers: in, in_stride, w, w_stride, bias, out, out_stride, flags, rq, gelu b/c/one, act_rq
  task automatic prog(input logic [31:0] r [13]);
    logic [31:0] id, d;
    per_access(0, 32'(REG_ACQUIRE), 0, id);
    checks++;
    if (id == 32'hFFFF_FFFF) begin failures++; $display("no free context"); end
    for (int k = 0; k < 13; k++) per_access(1, 32'(REG_JOB_BASE) + 32'(4 * k), r[k], d);
    per_access(1, 32'(REG_TRIGGER), 0, d);
  endtask

  initial run();

  task automatic run();
    logic [31:0] r [13], d;
    int exp [64][64];
    longint acc;
    per_req = '0;
    foreach (mem[a]) mem[a] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // task A: K-tile 0 of a 64x128 GEMM with bias (X at 0x0000 stride 128,
    // W at 0x4000 stride 128, bias at 0x8000), task B: K-tile 1, output
    // at 0xA000 stride 64
    r = '{default: 0};
    r[0] = 32'h0000; r[1] = 128; r[2] = 32'h4000; r[3] = 128; r[4] = 32'h8000;
    r[5] = 32'hA000; r[6] = 64; r[7] = 32'h50;        // GEMM, first_k, bias
    r[8] = 32'd23 | (32'd15 << 8);
    prog(r);
    r[0] = 32'h0040; r[2] = 32'h4040; r[7] = 32'h20;  // GEMM, last_k
    prog(r);
    per_access(0, 32'(REG_ACQUIRE), 0, d);
    checks++;
    if (d != 32'hFFFF_FFFF) begin failures++; $display("ACQUIRE with two queued tasks: %h", d); end
    per_access(0, 32'(REG_STATUS), 0, d);
    checks++;
    if (d[0] != 1'b1) begin failures++; $display("STATUS not busy: %h", d); end
    while (evt_cnt < 2) @(negedge clk);
    foreach (exp[i, j]) begin
      int bw;
      bw = int'({mem[32'h8000 + 4*j + 2], mem[32'h8000 + 4*j + 1], mem[32'h8000 + 4*j]});
      bw = (bw << 8) >>> 8;    // sign-extend the 24-bit bias
      acc = bw;
      for (int k = 0; k < 128; k++) acc += sb(i * 128 + k) * sb(32'h4000 + j * 128 + k);
      exp[i][j] = ref_requant(acc, 23, 15);
    end
    repeat (5) @(negedge clk);
    foreach (exp[i, j]) begin
      checks++;
      if (sb(32'hA000 + i * 64 + j) != exp[i][j]) begin
        failures++;
        if (failures < 10) $display("k128 [%0d][%0d] got %0d exp %0d", i, j, sb(32'hA000 + i * 64 + j), exp[i][j]);
      end
    end

    // task C: ReLU GEMM, single K-tile, output at 0xC000
    r[0] = 32'h1000; r[1] = 64; r[2] = 32'h6000; r[3] = 64; r[5] = 32'hC000;
    r[7] = 32'h34;  r[8] = 32'd9 | (32'd12 << 8);      // ReLU, first_k, last_k
    prog(r);
    while (evt_cnt < 3) @(negedge clk);
    repeat (5) @(negedge clk);
    foreach (exp[i, j]) begin
      acc = 0;
      for (int k = 0; k < 64; k++) acc += sb(32'h1000 + i * 64 + k) * sb(32'h6000 + j * 64 + k);
      exp[i][j] = ref_act(ref_requant(acc, 9, 12), 1, 0, 0, 0, 1, 0);
    end
    foreach (exp[i, j]) begin
      checks++;
      if (sb(32'hC000 + i * 64 + j) != exp[i][j]) begin
        failures++;
        if (failures < 10) $display("relu [%0d][%0d] got %0d exp %0d", i, j, sb(32'hC000 + i * 64 + j), exp[i][j]);
      end
    end
    per_access(0, 32'(REG_DONE_CNT), 0, d);
    checks++;
    if (d != 3) begin failures++; $display("DONE_CNT %0d", d); end
    checks++;
    if (denied == 0) begin failures++; $display("memory never refused a request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
