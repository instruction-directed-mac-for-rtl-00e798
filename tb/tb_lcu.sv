// tb_lcu: self-checking test of one local control unit (core id 3).
// The testbench plays the wireless interface (packets it is given are heard
// back by the LCU, as on a broadcast medium) and the qubit hardware (fixed
// latencies, chosen correction bits). Scenario: a bundle with local
// instructions, two TPS instructions dispatched in reverse token order
// (to = 2, then to = 0), a TPD and packets for another core. Checks: nothing
// executes before the closing to = 0 token; packets for other cores are
// ignored; local gates run in order; the TPS with to = 0 runs at once
// (TPSB sorting) and is followed by CBP(dst, cb) and TP(1); the TPS with
// to = 2 waits for token 2 (tok_wait); the TPD runs only when its
// correction bits arrive and gets those bits; the EOCP comes last, as an
// unscheduled access; a core with no instructions ignores the next bundle's
// token and stays idle.
`timescale 1ns/1ps
module tb_lcu;
  import idmac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [QC_W-1:0] my_id = 7'd3;
  logic rx_valid = 0, tx_valid, tx_sched, tx_ready;
  pkt_t rx_pkt = '0, tx_pkt;
  logic loc_valid, loc_done = 0;
  gen_instr_t loc_instr;
  logic tps_valid, tps_done = 0;
  tps_instr_t tps_instr;
  logic [CB_W-1:0] tps_cb = '0, tpd_cb;
  logic tpd_valid, tpd_done = 0;
  tpd_instr_t tpd_instr;
  logic exec, tok_wait, eoc, error;
  int checks = 0, failures = 0;

  lcu dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // packet builders by plain concatenation of the field layout
  function automatic pkt_t lip(int qc, int g, int a, int b);
    return {3'd0, 7'(qc), 4'(g), 4'(a), 4'(b), 14'd0};
  endfunction
  function automatic pkt_t tpsip(int qc, int qs, int dqc, int dq, int to);
    return {3'd2, 7'(qc), 4'hE, 4'(qs), 7'(dqc), 4'(dq), 7'(to)};
  endfunction
  function automatic pkt_t tpdip(int qc, int q);
    return {3'd1, 7'(qc), 4'hF, 4'(q), 18'd0};
  endfunction
  function automatic pkt_t cbp(int dqc, int dq, int cb);
    return {3'd3, 7'(dqc), 4'(dq), 2'(cb), 20'd0};
  endfunction
  function automatic pkt_t tp(int to);
    return {3'd4, 7'(to), 26'd0};
  endfunction

  // ---- wireless interface model: queue of packets to be heard
  pkt_t rxq[$];
  pkt_t txlog[$];
  logic txlog_sched[$];
  int wi_busy = 0;
  assign tx_ready = (wi_busy == 0);
  always @(posedge clk) if (rst_n) begin
    rx_valid <= 0;
    if (rxq.size() > 0) begin rx_valid <= 1; rx_pkt <= rxq.pop_front(); end
    if (wi_busy > 0) wi_busy <= wi_busy - 1;
    if (tx_valid && tx_ready) begin
      txlog.push_back(tx_pkt); txlog_sched.push_back(tx_sched);
      rxq.push_back(tx_pkt);  // heard by everyone, including the sender
      wi_busy <= 3;
    end
  end

  // ---- qubit hardware model
  gen_instr_t loc_log[$];
  tps_instr_t tps_log[$];
  tpd_instr_t tpd_log[$];
  logic [1:0] tpd_cb_log[$];
  int lc = 0, tc = 0, dc = 0;
  logic [1:0] next_cb = 2'd2;
  always @(posedge clk) if (rst_n) begin
    loc_done <= 0; tps_done <= 0; tpd_done <= 0;
    if (loc_valid && !loc_done) begin
      lc++;
      if (lc == 3) begin loc_done <= 1; loc_log.push_back(loc_instr); lc = 0; end
    end
    if (tps_valid && !tps_done) begin
      tc++;
      if (tc == 5) begin tps_done <= 1; tps_cb <= next_cb; tps_log.push_back(tps_instr); tc = 0; end
    end
    if (tpd_valid && !tpd_done) begin
      dc++;
      if (dc == 2) begin tpd_done <= 1; tpd_log.push_back(tpd_instr); tpd_cb_log.push_back(tpd_cb); dc = 0; end
    end
  end

  int n_tok_wait = 0;
  bit any_exec_early = 0;
  always @(posedge clk) if (tok_wait) n_tok_wait++;

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // -------- dispatch phase
    rxq.push_back(lip(3, 1, 1, 2));
    rxq.push_back(lip(4, 1, 1, 2));         // other core
    rxq.push_back(lip(3, 2, 3, 4));
    rxq.push_back(tpsip(3, 5, 8, 2, 2));    // to = 2 first
    rxq.push_back(tpsip(3, 6, 9, 1, 0));    // to = 0
    rxq.push_back(tpdip(3, 7));
    rxq.push_back(tpdip(4, 7));             // other core
    rxq.push_back(lip(3, 3, 5, 6));
    repeat (15) begin
      @(negedge clk);
      if (loc_valid || tps_valid || tpd_valid || exec) any_exec_early = 1;
    end
    check(!any_exec_early, "nothing executes during dispatch");
    // -------- execution phase
    rxq.push_back(tp(0));
    repeat (12) @(negedge clk);
    check(exec, "execution phase entered on to=0");
    // to=0 TPS executed first, then CBP + TP(1)
    while (txlog.size() < 2) @(negedge clk);
    check(tps_log.size() == 1 && tps_log[0].qs == 4'd6, "TPS with to=0 runs first");
    check(txlog[0] == cbp(9, 1, 2) && txlog_sched[0], "CBP to qc9.q1 with cb=2, scheduled");
    check(txlog[1] == tp(1) && txlog_sched[1], "token passed with to=1");
    rxq.push_back(cbp(4, 7, 1));            // bits for another core: ignored
    repeat (40) @(negedge clk);
    check(tps_log.size() == 1, "TPS with to=2 waits for its token");
    check(tok_wait, "tok_wait while blocked");
    check(loc_log.size() == 3 && loc_log[0] == gen_instr_t'({7'd3, 4'd1, 4'd1, 4'd2}) &&
          loc_log[1] == gen_instr_t'({7'd3, 4'd2, 4'd3, 4'd4}) &&
          loc_log[2] == gen_instr_t'({7'd3, 4'd3, 4'd5, 4'd6}), "local gates in order");
    check(tpd_log.size() == 0, "TPD waits for its correction bits");
    next_cb = 2'd1;
    rxq.push_back(tp(2));
    while (txlog.size() < 4) @(negedge clk);
    check(tps_log.size() == 2 && tps_log[1].qs == 4'd5 && tps_log[1].qd == 11'({7'd8, 4'd2}),
          "TPS with to=2 after token 2");
    check(txlog[2] == cbp(8, 2, 1) && txlog[3] == tp(3), "CBP and TP(3)");
    repeat (20) @(negedge clk);
    check(txlog.size() == 4, "no EOC while TPD pending");
    rxq.push_back(cbp(3, 7, 3));
    repeat (20) @(negedge clk);
    check(tpd_log.size() == 1 && tpd_log[0].q == 4'd7 && tpd_cb_log[0] == 2'd3, "TPD executed with its bits");
    check(txlog.size() == 5 && txlog[4] == {3'd5, 7'd3, 26'd0} && !txlog_sched[4], "EOCP last, unscheduled");
    check(!exec, "execution phase left");
    // -------- a bundle without work for this core
    rxq.push_back(lip(5, 1, 0, 0));
    rxq.push_back(tp(0));
    repeat (20) @(negedge clk);
    check(!exec && txlog.size() == 5, "uninvolved core stays idle");
    // -------- a small bundle with one local gate
    rxq.push_back(lip(3, 9, 1, 1));
    rxq.push_back(tp(0));
    repeat (30) @(negedge clk);
    check(loc_log.size() == 4 && txlog.size() == 6 && txlog[5] == {3'd5, 7'd3, 26'd0}, "second bundle done");
    check(n_tok_wait > 30, "token wait observed");
    check(!error, "no error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
