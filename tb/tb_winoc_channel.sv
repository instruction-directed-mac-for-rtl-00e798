// tb_winoc_channel: self-checking test of the shared wireless medium.
// Five ports each run a small transmitter model (request, send its flits
// while granted, release). Checks: at most one grant at a time; every flit
// is broadcast one cycle later unchanged; a scheduled request waiting while
// the medium is busy is served before waiting unscheduled ones; unscheduled
// requesters that always want the medium are served round-robin; the
// collision flags stay low.
`timescale 1ns/1ps
module tb_winoc_channel;
  import idmac_pkg::*;
  localparam int NP = 5;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] req = '0, sched = '0, grant, tx_valid;
  logic [FLIT_W-1:0] tx_flit [NP];
  logic rx_valid;
  logic [FLIT_W-1:0] rx_flit;
  logic collision, sched_conflict;
  int checks = 0, failures = 0;

  winoc_channel #(.N_PORTS(NP)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // transmitter models
  int left [NP];
  int sent_by [NP];
  int owners[$];
  logic [FLIT_W-1:0] exp_flit;
  logic exp_valid = 0;
  always_comb for (int i = 0; i < NP; i++) begin
    tx_valid[i] = grant[i] && left[i] > 0;
    tx_flit[i]  = FLIT_W'(i * 256 + left[i]);
  end
  always @(posedge clk) if (rst_n) begin
    check($countones(grant) <= 1, "one owner");
    if (exp_valid) check(rx_valid && rx_flit == exp_flit, "broadcast one cycle later");
    else           check(!rx_valid, "idle medium");
    exp_valid <= 0;
    for (int i = 0; i < NP; i++) if (tx_valid[i]) begin
      exp_valid <= 1; exp_flit <= tx_flit[i];
      if (left[i] == 3) owners.push_back(i);  // first flit of a packet
      left[i] <= left[i] - 1;
      if (left[i] == 1) begin req[i] <= 0; sent_by[i]++; end
    end
  end

  task automatic send(int p, logic s);
    left[p] = 3; sched[p] = s; req[p] = 1;
  endtask

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < NP; i++) begin left[i] = 0; sent_by[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // 1. port 1 unscheduled takes the free medium; while it sends, port 2
    //    (unscheduled) and port 4 (scheduled) ask: port 4 must go next.
    @(negedge clk); send(1, 0);
    @(negedge clk); @(negedge clk); send(2, 0); send(4, 1);
    repeat (20) @(negedge clk);
    check(owners.size() == 3 && owners[0] == 1 && owners[1] == 4 && owners[2] == 2,
          "scheduled request served before waiting unscheduled one");
    owners.delete();
    // 2. round robin: ports 0..3 request unscheduled repeatedly
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) if (!req[i]) send(i, 0);
      while (req != '0) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    check(owners.size() == 24, $sformatf("24 packets sent (%0d)", owners.size()));
    for (int k = 4; k < owners.size(); k++)
      check(owners[k] == owners[k-4], "round-robin order repeats every 4");
    begin
      automatic int seen = 0;
      for (int k = 0; k < 4; k++) seen |= 1 << owners[k];
      check(seen == 'hf, "each of four requesters served once per round");
    end
    check(!collision && !sched_conflict, "no collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
