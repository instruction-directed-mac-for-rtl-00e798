// tb_dispatcher: self-checking test of the dispatch unit.
// Bundles with a random mix of local, TPS and TPD instructions are fed in;
// the testbench acts as the wireless interface and the EPR controller with
// random ready delays. Checks: each packet has the right type and fields
// (expected packets built by concatenating the published layouts); TPS
// instructions get token orders 0, 1, 2, ... restarting in every bundle; each
// TPS reaches the EPR controller before its packet is sent; every bundle ends
// with a token packet to = 0; disp_valid/disp_qc report each instruction.
`timescale 1ns/1ps
module tb_dispatcher;
  import idmac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, in_ready;
  instr_word_t in_instr = '0, epr_instr;
  logic epr_valid, epr_ready = 0;
  logic tx_valid, tx_ready = 0;
  pkt_t tx_pkt;
  logic disp_valid, bundle_done;
  logic [QC_W-1:0] disp_qc;
  int checks = 0, failures = 0;

  dispatcher dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  pkt_t exp_pkts[$];
  instr_word_t exp_epr[$];
  logic [QC_W-1:0] exp_qc[$];
  int n_tok = 0, n_disp = 0, n_bundle_done = 0;

  // sinks with random ready
  always @(posedge clk) if (rst_n) begin
    tx_ready  <= ($urandom_range(0, 2) == 0);
    epr_ready <= ($urandom_range(0, 2) == 0);
    if (epr_valid && epr_ready) begin
      check(exp_epr.size() > 0 && epr_instr == exp_epr[0], "EPR request = TPS instruction");
      if (exp_epr.size() > 0) void'(exp_epr.pop_front());
    end
    if (tx_valid && tx_ready) begin
      check(exp_pkts.size() > 0 && tx_pkt == exp_pkts[0],
            $sformatf("packet %h expected %h", tx_pkt, exp_pkts.size() > 0 ? exp_pkts[0] : '0));
      if (tx_pkt[PKT_W-1 -: 3] == 3'd2)
        check(exp_epr.size() == 0 || exp_epr[0] != tx_pkt[PKT_W-4 -: INSTR_W],
              "EPR configured before TPSIP sent");
      if (exp_pkts.size() > 0) void'(exp_pkts.pop_front());
    end
    if (disp_valid) begin
      n_disp++;
      check(exp_qc.size() > 0 && disp_qc == exp_qc[0], "disp_qc");
      if (exp_qc.size() > 0) void'(exp_qc.pop_front());
    end
    if (bundle_done) n_bundle_done++;
  end

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int total = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      automatic int n = $urandom_range(1, 8);
      automatic int to = 0;
      for (int i = 0; i < n; i++) begin
        automatic int kind = $urandom_range(0, 2);
        automatic logic [6:0] qc = 7'($urandom_range(0, 99));
        automatic logic [3:0] g = (kind == 1) ? 4'hE : (kind == 2) ? 4'hF : 4'($urandom_range(0, 13));
        automatic logic [14:0] ops = 15'($urandom);
        automatic instr_word_t w = {qc, g, ops};
        pkt_t e;
        if (kind == 1) begin
          e = {3'd2, w, 7'(to)}; to++;
          exp_epr.push_back(w);
        end else if (kind == 2) begin
          e = {3'd1, w[25:11], 18'd0};
        end else begin
          e = {3'd0, w[25:7], 14'd0};
        end
        exp_pkts.push_back(e);
        exp_qc.push_back(qc);
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_instr = w; in_last = (i == n - 1);
        @(negedge clk); in_valid = 0;
        total++;
      end
      exp_pkts.push_back({3'd4, 7'd0, 26'd0});  // closing token to = 0
      while (exp_pkts.size() > 0) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(n_disp == total, "one disp_valid per instruction");
    check(n_bundle_done == 30, "one bundle_done per bundle");
    check(exp_epr.size() == 0, "all TPS sent to EPR controller");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
