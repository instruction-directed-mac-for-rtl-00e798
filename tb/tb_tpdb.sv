// tb_tpdb: self-checking test of the TPD buffer.
// TPDs for distinct qubits are stored, correction bits arrive in an order
// different from the storage order, and each TPD must be offered with its own
// bits only after they arrived; unmatched bits and overflow are checked.
`timescale 1ns/1ps
module tb_tpdb;
  import idmac_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  logic push = 0;
  tpd_instr_t push_instr = '0, out_instr;
  logic cb_valid = 0;
  logic [QB_W-1:0] cb_qubit = '0;
  logic [CB_W-1:0] cb = '0, out_cb;
  logic cb_unmatched, out_valid, out_pop = 0, empty, full, overflow;
  int checks = 0, failures = 0;

  tpdb #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic tpd_instr_t mk(int qc, int q);
    tpd_instr_t t;
    t.qc = QC_W'(qc); t.gate = GATE_TPD; t.q = QB_W'(q);
    return t;
  endfunction

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int qs[4];
      int cbs[4];
      int order[4];
      // four distinct qubits
      for (int i = 0; i < 4; i++) begin
        qs[i] = (round * 3 + i * 4 + 1) % 16; cbs[i] = $urandom_range(0, 3); order[i] = i;
      end
      order.shuffle();
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); push = 1; push_instr = mk(round, qs[i]);
      end
      @(negedge clk); push = 0;
      check(full && !out_valid, "full, nothing ready before bits");
      // overflow attempt
      push = 1; push_instr = mk(99, 15);
      @(negedge clk); push = 0;
      check(overflow, "overflow on fifth TPD");
      // unmatched bits (qubit not present)
      cb_valid = 1; cb_qubit = QB_W'((qs[0] + 2) % 16); cb = 2'd1;
      if (cb_qubit == QB_W'(qs[1]) || cb_qubit == QB_W'(qs[2]) || cb_qubit == QB_W'(qs[3]))
        cb_qubit = QB_W'((qs[0] + 1) % 16);
      #1 check(cb_unmatched, "unmatched CBP flagged");
      @(negedge clk); cb_valid = 0;
      check(!out_valid, "unmatched bits not accepted");
      for (int k = 0; k < 4; k++) begin
        automatic int i = order[k];
        cb_valid = 1; cb_qubit = QB_W'(qs[i]); cb = CB_W'(cbs[i]);
        #1 check(!cb_unmatched, "matched CBP");
        @(negedge clk); cb_valid = 0;
        check(out_valid && out_instr == mk(round, qs[i]) && out_cb == CB_W'(cbs[i]),
              "entry offered with its own bits");
        out_pop = 1; @(negedge clk); out_pop = 0;
        check(!out_valid, "popped");
      end
      check(empty, "empty after round");
      rst_n = 0; @(negedge clk); rst_n = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
