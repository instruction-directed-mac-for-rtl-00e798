// tb_control_unit: self-checking test of the global control unit (fetch,
// decode, dispatcher, EPR controller together).
// A three-bundle program is placed in a memory model with one cycle of read
// latency; the testbench plays the CU's wireless interface and the cores'
// end-of-computation packets. Checks: the packet sequence (types, fields,
// token orders, closing to = 0 token); exactly DECODE_CYCLES + 3 cycles
// between the packets of consecutive local instructions (read request, one
// cycle of memory latency, decode, hand-over); the EPR generator receives
// (source, destination) for every TPS; the next bundle is not fetched until
// every involved core has reported end of computation; done and the bundle
// count at the end.
`timescale 1ns/1ps
module tb_control_unit;
  import idmac_pkg::*;
  localparam int DEC = 10;
  logic clk = 0, rst_n = 0;
  logic start = 0, done;
  logic [15:0] start_addr = 16'd100;
  logic [31:0] bundles;
  logic mem_rd_en, mem_rvalid;
  logic [15:0] mem_addr;
  instr_word_t mem_rdata;
  logic tx_valid, tx_sched, tx_ready = 1, rx_valid = 0;
  pkt_t tx_pkt, rx_pkt = '0;
  logic epr_cfg_valid, epr_cfg_ready = 1;
  logic [QC_W-1:0] epr_cfg_src, epr_cfg_dst;
  int checks = 0, failures = 0;
  longint cyc = 0;

  control_unit #(.DECODE_CYCLES(DEC), .ADDR_W(16)) dut (.*);
  instr_mem_model #(.ADDR_W(16), .LATENCY(1)) u_mem (
    .clk, .rd_en (mem_rd_en), .addr (mem_addr), .rvalid (mem_rvalid), .rdata (mem_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic instr_word_t loc(int qc, int g, int a, int b);
    return {7'(qc), 4'(g), 4'(a), 4'(b), 7'd0};
  endfunction
  function automatic instr_word_t tps(int qc, int qs, int dqc, int dq);
    return {7'(qc), 4'hE, 4'(qs), 7'(dqc), 4'(dq)};
  endfunction
  function automatic instr_word_t tpd(int qc, int q);
    return {7'(qc), 4'hF, 4'(q), 11'd0};
  endfunction

  pkt_t   exp_pkts[$];
  longint tx_t[$];
  pkt_t   sent[$];
  logic [13:0] epr_seen[$];

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      check(tx_sched, "dispatch access is scheduled");
      sent.push_back(tx_pkt);
      tx_t.push_back(cyc);
      check(exp_pkts.size() > 0 && tx_pkt == exp_pkts[0], $sformatf("packet %h", tx_pkt));
      if (exp_pkts.size() > 0) void'(exp_pkts.pop_front());
    end
    if (epr_cfg_valid && epr_cfg_ready) epr_seen.push_back({epr_cfg_src, epr_cfg_dst});
  end

  task automatic eoc(int qc);
    @(negedge clk); rx_valid = 1; rx_pkt = {3'd5, 7'(qc), 26'd0};
    @(negedge clk); rx_valid = 0;
  endtask

  task automatic wait_closing();
    while (!(sent.size() > 0 && sent[$] == {3'd4, 7'd0, 26'd0})) @(negedge clk);
    sent.delete();
  endtask

  task automatic no_fetch(int n, string what);
    automatic bit rd = 0;
    repeat (n) begin @(negedge clk); if (mem_rd_en) rd = 1; end
    check(!rd, what);
  endtask

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // program at 100: B0 = {LIP qc5, TPS qc2 -> qc7.q3, TPD qc7.q3}
    //                 B1 = {LIP qc9, LIP qc9, LIP qc10}
    //                 B2 = {TPS qc1 -> qc4.q0, TPS qc6 -> qc4.q1, TPD qc4.q0, TPD qc4.q1}
    u_mem.mem[100] = 26'd3;
    u_mem.mem[101] = loc(5, 1, 2, 3);
    u_mem.mem[102] = tps(2, 9, 7, 3);
    u_mem.mem[103] = tpd(7, 3);
    u_mem.mem[104] = 26'd3;
    u_mem.mem[105] = loc(9, 2, 0, 1);
    u_mem.mem[106] = loc(9, 3, 4, 5);
    u_mem.mem[107] = loc(10, 4, 6, 7);
    u_mem.mem[108] = 26'd4;
    u_mem.mem[109] = tps(1, 2, 4, 0);
    u_mem.mem[110] = tps(6, 3, 4, 1);
    u_mem.mem[111] = tpd(4, 0);
    u_mem.mem[112] = tpd(4, 1);
    u_mem.mem[113] = 26'd0;
    exp_pkts = '{
      {3'd0, 19'(loc(5, 1, 2, 3) >> 7), 14'd0},
      {3'd2, tps(2, 9, 7, 3), 7'd0},
      {3'd1, 15'(tpd(7, 3) >> 11), 18'd0},
      {3'd4, 7'd0, 26'd0},
      {3'd0, 19'(loc(9, 2, 0, 1) >> 7), 14'd0},
      {3'd0, 19'(loc(9, 3, 4, 5) >> 7), 14'd0},
      {3'd0, 19'(loc(10, 4, 6, 7) >> 7), 14'd0},
      {3'd4, 7'd0, 26'd0},
      {3'd2, tps(1, 2, 4, 0), 7'd0},
      {3'd2, tps(6, 3, 4, 1), 7'd1},
      {3'd1, 15'(tpd(4, 0) >> 11), 18'd0},
      {3'd1, 15'(tpd(4, 1) >> 11), 18'd0},
      {3'd4, 7'd0, 26'd0}};
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // bundle 0: cores 5, 2, 7 involved
    wait_closing();
    no_fetch(20, "no fetch before any EOC");
    eoc(5); eoc(2);
    no_fetch(30, "no fetch while core 7 still busy");
    eoc(9);  // a core that was not involved changes nothing
    no_fetch(10, "uninvolved EOC ignored");
    tx_t.delete();
    eoc(7);
    // bundle 1: three local instructions, back to back
    wait_closing();
    check(tx_t.size() == 4, "bundle 1: three packets and the token");
    if (tx_t.size() == 4) begin
      check(tx_t[1] - tx_t[0] == DEC + 3, $sformatf("decode spacing %0d", tx_t[1] - tx_t[0]));
      check(tx_t[2] - tx_t[1] == DEC + 3, $sformatf("decode spacing %0d", tx_t[2] - tx_t[1]));
    end
    eoc(9); eoc(10);
    wait_closing();
    eoc(1); eoc(6);
    no_fetch(10, "core 4 still busy");
    check(!done, "not done yet");
    eoc(4);
    repeat (10) @(negedge clk);
    check(done, "program done");
    check(bundles == 3, "three bundles");
    check(exp_pkts.size() == 0, "all packets seen");
    check(epr_seen.size() == 3 && epr_seen[0] == {7'd2, 7'd7} && epr_seen[1] == {7'd1, 7'd4} &&
          epr_seen[2] == {7'd6, 7'd4}, "EPR generator configured per TPS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
