// tb_lib_fifo: self-checking test of the local instruction buffer.
// Random pushes and pops (including pushes into a full buffer) are mirrored in
// a queue model; head, empty, full and the sticky overflow are compared every
// cycle. Also checks one-cycle push-to-head latency.
`timescale 1ns/1ps
module tb_lib_fifo;
  localparam int W = 19, D = 4;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full, overflow;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  logic exp_ovf = 0;

  lib_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s @%0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: push one, see it next cycle
    @(negedge clk); push = 1; din = 19'h1234;
    @(negedge clk); push = 0;
    check(!empty && dout == 19'h1234, "push-to-head latency 1 cycle");
    @(negedge clk); pop = 1;
    @(negedge clk); pop = 0;
    check(empty, "empty after pop");
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      push = ($urandom_range(0, 99) < 55);
      pop  = ($urandom_range(0, 99) < 45);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      // update model with what the DUT saw before the edge
      begin
        automatic bit did_pop  = pop && model.size() > 0;
        automatic bit can_push = push && (model.size() < D || did_pop);
        if (did_pop) void'(model.pop_front());
        if (can_push) model.push_back(din);
        if (push && !can_push) exp_ovf = 1;
      end
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == D), "full flag");
      check(overflow == exp_ovf, "overflow flag");
      if (model.size() > 0) check(dout == model[0], "head data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
