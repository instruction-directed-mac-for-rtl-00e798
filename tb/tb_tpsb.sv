// tb_tpsb: self-checking test of the token-order-sorted TPS buffer.
// Entries are inserted with random token orders (out of order on purpose),
// popped while others are inserted, and the head is compared with the
// minimum of a reference list (ties in arrival order). Overflow is provoked.
`timescale 1ns/1ps
module tb_tpsb;
  import idmac_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  tps_instr_t push_instr = '0, head_instr;
  logic [TO_W-1:0] push_to = '0, head_to;
  logic empty, full, overflow;
  int checks = 0, failures = 0;

  typedef struct { tps_instr_t instr; logic [TO_W-1:0] to; } ent_t;
  ent_t model[$];
  logic exp_ovf = 0;

  tpsb #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // insert keeping ascending "to", equal values after existing ones
  function automatic void model_insert(ent_t e);
    int p = model.size();
    for (int i = model.size() - 1; i >= 0; i--) if (model[i].to > e.to) p = i;
    model.insert(p, e);
  endfunction

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // directed: insert to = 5, 2, 7, 2 -> head order 2, 2, 5, 7
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); push = 1; push_to = TO_W'(i == 0 ? 5 : i == 1 ? 2 : i == 2 ? 7 : 2);
      push_instr = tps_instr_t'(i + 1);
    end
    @(negedge clk); push = 0;
    check(full, "full after 4");
    check(head_to == 2 && head_instr == tps_instr_t'(2), "sorted head 2 (first arrival)");
    pop = 1; @(negedge clk);
    check(head_to == 2 && head_instr == tps_instr_t'(4), "second 2");
    @(negedge clk);
    check(head_to == 5, "then 5");
    @(negedge clk);
    check(head_to == 7, "then 7");
    @(negedge clk); pop = 0;
    check(empty, "empty");
    // random
    for (int n = 0; n < 800; n++) begin
      @(negedge clk);
      push = ($urandom_range(0, 99) < 50);
      pop  = ($urandom_range(0, 99) < 45);
      push_to = TO_W'($urandom_range(0, 20));
      push_instr = tps_instr_t'($urandom);
      @(posedge clk); #1;
      begin
        automatic bit did_pop = pop && model.size() > 0;
        if (did_pop) void'(model.pop_front());
        if (push) begin
          if (model.size() < D) model_insert('{push_instr, push_to});
          else exp_ovf = 1;
        end
      end
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      check(overflow == exp_ovf, "overflow");
      if (model.size() > 0)
        check(head_to == model[0].to && head_instr == model[0].instr, "sorted head");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
