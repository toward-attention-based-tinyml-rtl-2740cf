// tb_hwpe_ctrl: programs tasks through the peripheral port and plays the
// engine and the output streamer. Checks ACQUIRE/TRIGGER with both contexts
// (the third acquire must fail while two tasks are queued), that the task
// handed to the engine and the streamer patterns match what was written,
// that a task finishes only after both engine done and sink idle, the event
// pulse, DONE_CNT, STATUS and in-order execution of the two contexts.
module tb_hwpe_ctrl;
  import ita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  per_req_t preq; per_rsp_t prsp;
  logic eng_start, eng_done, str_start, sink_busy, evt, busy;
  ita_task_t task_o;
  stream_cfg_t [3:0] scfg;
  int checks = 0, failures = 0, starts = 0, evts = 0;

  hwpe_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .per_req_i(preq), .per_rsp_o(prsp),
    .eng_start_o(eng_start), .eng_task_o(task_o), .eng_done_i(eng_done),
    .str_start_o(str_start), .str_cfg_o(scfg), .sink_busy_i(sink_busy), .evt_o(evt), .busy_o(busy));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic per_access(input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk);
    preq = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: d};
    #4; if (!prsp.gnt) failures++;
    @(negedge clk); preq = '0;
    #1; checks++; if (!prsp.rvalid) begin failures++; $display("no rvalid"); end
    r = prsp.rdata;
  endtask

  function automatic logic [31:0] jobval(input int tag, input int k);
    if (k == 7) return 32'h0000_0035 + 32'(tag << 6 & 32'h40);  // op=QK, last_k, first_k (+bias)
    if (k == 8) return 32'h0000_0705 + 32'(tag);
    return 32'h1000 * 32'(tag + 1) + 32'(k * 64);
  endfunction

  task automatic prog_task(input int tag, output logic [31:0] id);
    logic [31:0] r;
    per_access(0, 32'h04, 0, id);
    if (id == 32'hFFFF_FFFF) return;
    for (int k = 0; k < 13; k++) per_access(1, 32'h40 + 32'(4 * k), jobval(tag, k), r);
    per_access(0, 32'h44, 0, r);
    checks++; if (r != jobval(tag, 1)) begin failures++; $display("readback"); end
    per_access(1, 32'h00, 0, r);
  endtask

  // engine / sink model: done 30 cycles after start, sink busy 10 cycles longer
  int expect_tag = 0;
  always @(posedge clk) begin
    if (evt && rst_n) evts++;
    if (eng_start && rst_n) begin
      starts++;
      checks += 6;
      if (task_o.in_base != 32'h1000 * 32'(expect_tag + 1)) begin failures++; $display("in_base %h", task_o.in_base); end
      if (task_o.w_base != 32'h1000 * 32'(expect_tag + 1) + 128) failures++;
      if (task_o.op != OP_QK || !task_o.first_k || !task_o.last_k) failures++;
      if (task_o.rq.mult != 8'(5 + expect_tag) || task_o.rq.shift != 5'd7) failures++;
      if (scfg[0].base != task_o.in_base || scfg[0].len0 != 16'd64 || scfg[0].len1 != 16'd4) failures++;
      if (scfg[3].base != task_o.out_base || scfg[3].stride1 != 32'd16 ||
          scfg[2].len0 != (task_o.bias_en ? 16'd4 : 16'd0)) failures++;
      expect_tag++;
    end
  end

  initial run();

  task automatic run();
    logic [31:0] id0, id1, id2, r;
    preq = '0; eng_done = 0; sink_busy = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    prog_task(0, id0);
    prog_task(1, id1);
    checks++; if (id0 != 0 || id1 != 1) begin failures++; $display("ids %0d %0d", id0, id1); end
    per_access(0, 32'h04, 0, id2);
    checks++; if (id2 != 32'hFFFF_FFFF) begin failures++; $display("third acquire %h", id2); end
    per_access(0, 32'h08, 0, r);
    checks++; if (r[0] != 1'b1 || r[2:1] != 2'd2) begin failures++; $display("status %h", r); end
    for (int t = 0; t < 2; t++) begin
      while (starts <= t) @(negedge clk);
      sink_busy = 1;
      repeat (30) @(negedge clk);
      eng_done = 1; @(negedge clk); eng_done = 0;
      repeat (10) @(negedge clk);
      checks++; if (evts != t) begin failures++; $display("finished before sink idle evts=%0d t=%0d starts=%0d", evts, t, starts); end
      sink_busy = 0;
      repeat (3) @(negedge clk);
      checks++; if (evts != t + 1) begin failures++; $display("no event"); end
      if (t == 0) begin
        prog_task(2, id2);
        checks++; if (id2 != 0) begin failures++; $display("freed context id %0d", id2); end
      end
    end
    // third task
    begin
      while (starts < 3) @(negedge clk);
      @(negedge clk); eng_done = 1; @(negedge clk); eng_done = 0;
      repeat (3) @(negedge clk);
    end
    per_access(0, 32'h14, 0, r);
    checks++; if (r != 3) begin failures++; $display("done count %0d", r); end
    per_access(0, 32'h08, 0, r);
    checks++; if (r != 0) begin failures++; $display("status idle %h", r); end
    checks++; if (starts != 3 || evts != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
