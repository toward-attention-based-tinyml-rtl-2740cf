// tb_hwpe_tcdm_mux: four streamers (8, 8, 8 and 2 words) with random
// requests share 16 ports. Checks that each port carries the request of
// exactly one streamer word, grants and read data return to the right
// streamer and word, no port is used twice, and no streamer waits more than
// NS cycles while requesting.
module tb_hwpe_tcdm_mux;
  import ita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tcdm_req_t [3:0][7:0] sreq;
  tcdm_rsp_t [3:0][7:0] srsp;
  tcdm_req_t [15:0] preq;
  tcdm_rsp_t [15:0] prsp;
  logic [15:0] deny;
  int checks = 0, failures = 0, waits [4], both_lines = 0;
  localparam int NW [4] = '{8, 8, 8, 2};

  hwpe_tcdm_mux #(.NS(4), .NP(16), .NW({4'd2, 4'd8, 4'd8, 4'd8})) dut (.clk_i(clk), .rst_ni(rst_n),
    .s_req_i(sreq), .s_rsp_o(srsp), .p_req_o(preq), .p_rsp_i(prsp));

  // memory model: read data = address
  always_comb for (int p = 0; p < 16; p++) begin
    prsp[p].gnt = preq[p].req && !deny[p];
  end
  always_ff @(posedge clk) for (int p = 0; p < 16; p++) begin
    prsp[p].rvalid <= preq[p].req && prsp[p].gnt;
    prsp[p].rdata  <= {32'h0, preq[p].addr};
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial run();
  task automatic run();
    logic [3:0][7:0] exp_rv;
    sreq = '0; deny = '0; exp_rv = '0;
    foreach (waits[s]) waits[s] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int s = 0; s < 4; s++) begin
        bit on = ($urandom % 4) != 0;
        for (int w = 0; w < 8; w++) begin
          sreq[s][w] = '0;
          if (w < NW[s] && on) begin
            sreq[s][w].req  = ($urandom % 4) != 0;
            sreq[s][w].addr = 32'(s * 4096 + w * 8 + ($urandom % 64) * 64);
          end
        end
      end
      deny = 16'($urandom) & 16'($urandom);
      #4;
      // responses of last cycle's grants
      for (int s = 0; s < 4; s++) for (int w = 0; w < 8; w++) begin
        checks++;
        if (srsp[s][w].rvalid != exp_rv[s][w]) begin failures++; $display("rvalid %0d/%0d", s, w); end
      end
      // every streamer word request appears on exactly one port, or none if not served
      begin
        int served_words = 0, lines = 0;
        for (int s = 0; s < 4; s++) begin
          bit wants = 0, served = 0;
          for (int w = 0; w < 8; w++) wants |= sreq[s][w].req;
          for (int w = 0; w < NW[s]; w++) begin
            int hits = 0;
            for (int p = 0; p < 16; p++)
              if (preq[p].req && preq[p].addr == sreq[s][w].addr && sreq[s][w].req) begin
                hits++;
                checks++;
                if (srsp[s][w].gnt != prsp[p].gnt) begin failures++; $display("gnt routing"); end
              end
            if (hits > 0) served = 1;
            if (sreq[s][w].req) begin
              checks++;
              if (hits > 1) begin failures++; $display("word on %0d ports", hits); end
            end
          end
          if (served && NW[s] == 8) lines++;
          if (wants && !served) waits[s]++; else waits[s] = 0;
          checks++;
          if (waits[s] > 4) begin failures++; $display("streamer %0d starved", s); end
          for (int w = 0; w < 8; w++) exp_rv[s][w] = srsp[s][w].gnt && sreq[s][w].req;
        end
        if (lines == 2) both_lines++;
      end
      @(posedge clk);
      #1;
      for (int s = 0; s < 4; s++) for (int w = 0; w < 8; w++) if (exp_rv[s][w]) begin
        checks++;
        if (srsp[s][w].rdata[31:0] != sreq[s][w].addr) begin failures++; $display("rdata routing %0d/%0d", s, w); end
      end
    end
    checks++; if (both_lines == 0) begin failures++; $display("never two lines in one cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
