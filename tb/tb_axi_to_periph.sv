// tb_axi_to_periph: AXI single-beat writes and reads to both 32-bit halves
// through the adapter into a register-file model with a variable grant
// delay. Checks the data, byte strobes, ids, response codes, and the error
// response to a burst.
module tb_axi_to_periph;
  import ita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axi_req_t areq; axi_rsp_t arsp; per_req_t preq; per_rsp_t prsp;
  int checks = 0, failures = 0;
  logic [31:0] regs [64];
  bit gnt_now;

  axi_to_periph dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(areq), .axi_rsp_o(arsp),
    .per_req_o(preq), .per_rsp_i(prsp));

  always @(negedge clk) gnt_now = ($urandom % 3) != 0;
  assign prsp.gnt = preq.req && gnt_now;
  always_ff @(posedge clk) begin
    prsp.rvalid <= preq.req && prsp.gnt;
    if (preq.req && prsp.gnt) begin
      if (preq.we) begin
        for (int b = 0; b < 4; b++) if (preq.be[b]) regs[preq.addr[7:2]][8*b +: 8] <= preq.wdata[8*b +: 8];
      end else prsp.rdata <= regs[preq.addr[7:2]];
    end
  end

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input logic [31:0] a, input logic [63:0] d, input logic [7:0] strb, input logic [7:0] len,
                    input logic [3:0] id, output logic [1:0] resp);
    @(negedge clk);
    areq.aw_valid = 1; areq.aw_addr = a; areq.aw_len = len; areq.aw_id = id;
    areq.w_valid = 1; areq.w_data = d; areq.w_strb = strb; areq.w_last = (len == 0);
    areq.b_ready = 1;
    #4; while (!arsp.aw_ready) begin @(negedge clk); #4; end
    @(negedge clk); areq.aw_valid = 0;
    for (int k = 0; k < int'(len); k++) begin
      areq.w_last = (k == int'(len) - 1);
      #4; while (!arsp.w_ready) begin @(negedge clk); #4; end
      @(negedge clk);
    end
    areq.w_valid = 0;
    #4; while (!arsp.b_valid) begin @(negedge clk); #4; end
    checks++; if (arsp.b_id != id) begin failures++; $display("b_id"); end
    resp = arsp.b_resp;
    @(negedge clk);
  endtask

  task automatic rd(input logic [31:0] a, input logic [3:0] id, output logic [31:0] d);
    @(negedge clk);
    areq.ar_valid = 1; areq.ar_addr = a; areq.ar_len = 0; areq.ar_id = id; areq.r_ready = 1;
    #4; while (!arsp.ar_ready) begin @(negedge clk); #4; end
    @(negedge clk); areq.ar_valid = 0;
    #4; while (!arsp.r_valid) begin @(negedge clk); #4; end
    checks++; if (arsp.r_id != id || !arsp.r_last || arsp.r_resp != 0) begin failures++; $display("r fields"); end
    d = a[2] ? arsp.r_data[63:32] : arsp.r_data[31:0];
    @(negedge clk);
  endtask

  initial run();
  task automatic run();
    logic [31:0] model [64];
    logic [1:0] resp;
    logic [31:0] d;
    areq = '0;
    for (int k = 0; k < 64; k++) begin regs[k] = 0; model[k] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int k = $urandom % 64;
      if ($urandom % 2) begin
        logic [31:0] v = $urandom;
        logic [3:0] s = 4'($urandom);
        wr(32'(k * 4), k[0] ? {v, 32'hDEAD_BEEF} : {32'hDEAD_BEEF, v}, k[0] ? {s, 4'h0} : {4'h0, s}, 0, 4'(n), resp);
        checks++; if (resp != 0) failures++;
        for (int b = 0; b < 4; b++) if (s[b]) model[k][8*b +: 8] = v[8*b +: 8];
      end else begin
        rd(32'(k * 4), 4'(n), d);
        checks++; if (d != model[k]) begin failures++; $display("reg %0d: %h vs %h", k, d, model[k]); end
      end
    end
    wr(32'h0, 64'h1, 8'hFF, 3, 4'd9, resp);
    checks++; if (resp != 2'b10) begin failures++; $display("burst not rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
