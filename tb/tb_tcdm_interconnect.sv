// tb_tcdm_interconnect: 4 masters on 4 banks of 16 words. Random reads and
// writes; checks that a bank grants at most one master per cycle, that read
// data match a memory model one cycle after the grant, and that every
// waiting master is served within NM cycles (round robin).
module tb_tcdm_interconnect;
  import ita_pkg::*;
  localparam int NM = 4, NB = 4, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tcdm_req_t [NM-1:0] req;
  tcdm_rsp_t [NM-1:0] rsp;
  logic [NB-1:0] breq, bwe; logic [NB-1:0][3:0] baddr; strb_t [NB-1:0] bbe; data_t [NB-1:0] bwd, brd;
  int checks = 0, failures = 0, conflicts = 0;
  logic [63:0] model [NB*W];
  logic [NM-1:0] exp_valid; logic [NM-1:0][63:0] exp_data;
  int wait_cnt [NM];
  logic [NM-1:0] granted;

  tcdm_interconnect #(.NM(NM), .NB(NB), .WORDS(W)) dut (.clk_i(clk), .rst_ni(rst_n),
    .mst_req_i(req), .mst_rsp_o(rsp), .bank_req_o(breq), .bank_we_o(bwe), .bank_addr_o(baddr),
    .bank_be_o(bbe), .bank_wdata_o(bwd), .bank_rdata_i(brd));
  for (genvar b = 0; b < NB; b++) begin : g_b
    tcdm_bank #(.WORDS(W), .DW(64)) i_bank (.clk_i(clk), .req_i(breq[b]), .we_i(bwe[b]),
      .addr_i(baddr[b]), .be_i(bbe[b]), .wdata_i(bwd[b]), .rdata_o(brd[b]));
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial run();

  task automatic run();
    req = '0; exp_valid = '0;
    foreach (wait_cnt[m]) wait_cnt[m] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // initialise memory through master 0
    for (int a = 0; a < NB * W; a++) begin
      @(negedge clk);
      req[0] = '{req: 1'b1, addr: 32'(a * 8), we: 1'b1, be: '1, wdata: {32'(a), $urandom}};
      model[a] = req[0].wdata;
      #4; if (!rsp[0].gnt) begin failures++; $display("lone master not granted"); end
    end
    @(negedge clk); req = '0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // check read data of last cycle's grants
      for (int m = 0; m < NM; m++) if (exp_valid[m]) begin
        checks++;
        if (!rsp[m].rvalid || rsp[m].rdata != exp_data[m]) begin
          failures++; $display("master %0d read %h exp %h", m, rsp[m].rdata, exp_data[m]);
        end
      end
      exp_valid = '0;
      for (int m = 0; m < NM; m++) begin
        if (!req[m].req) begin
          if ($urandom % 3 != 0) begin
            int a = $urandom % (NB * W);
            if ($urandom % 4 == 0) a = a % NB;  // hot spot for conflicts
            req[m] = '{req: 1'b1, addr: 32'(a * 8), we: 1'($urandom % 2), be: 8'($urandom), wdata: {$urandom, $urandom}};
          end
        end
      end
      #4;
      granted = '0;
      begin
        int per_bank [NB];
        foreach (per_bank[b]) per_bank[b] = 0;
        for (int m = 0; m < NM; m++) begin
          if (rsp[m].gnt) begin
            int a = int'(req[m].addr >> 3);
            per_bank[a % NB]++;
            if (req[m].we) begin
              for (int b = 0; b < 8; b++) if (req[m].be[b]) model[a][b*8 +: 8] = req[m].wdata[b*8 +: 8];
            end else begin
              exp_valid[m] = 1'b1; exp_data[m] = model[a];
            end
            wait_cnt[m] = 0;
            granted[m] = 1'b1;
          end else if (req[m].req) begin
            conflicts++;
            wait_cnt[m]++;
            checks++;
            if (wait_cnt[m] > NM) begin failures++; $display("master %0d starved", m); end
          end
        end
        foreach (per_bank[b]) begin
          checks++; if (per_bank[b] > 1) begin failures++; $display("bank %0d double grant", b); end
        end
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < NM; m++) if (granted[m]) req[m].req = 1'b0;
    end
    $display("conflicts: %0d", conflicts);
    checks++; if (conflicts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
