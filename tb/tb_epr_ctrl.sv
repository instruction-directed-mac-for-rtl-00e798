// tb_epr_ctrl: self-checking test of the EPR controller.
// TPS instructions with random source cores and destination qubit addresses
// are pushed while the generator side accepts at random; every configuration
// must carry (source QC, QC part of the destination address) in order, and
// in_ready must drop when DEPTH requests are waiting.
`timescale 1ns/1ps
module tb_epr_ctrl;
  import idmac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, cfg_valid, cfg_ready = 0;
  instr_word_t in_instr = '0;
  logic [QC_W-1:0] cfg_src, cfg_dst;
  int checks = 0, failures = 0;
  logic [13:0] exp[$];

  epr_ctrl #(.DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (cfg_valid && cfg_ready) begin
      check(exp.size() > 0 && {cfg_src, cfg_dst} == exp[0], "src/dst pair in order");
      if (exp.size() > 0) void'(exp.pop_front());
    end
    if (in_valid && in_ready) exp.push_back({in_instr[25:19], in_instr[10:4]});
  end

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // fill without draining: ready must fall after 4
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); in_valid = 1;
      in_instr = {7'(i + 10), 4'hE, 4'(i), 7'(i + 50), 4'(i)};
    end
    @(negedge clk); in_valid = 0;
    check(!in_ready && cfg_valid, "full after DEPTH requests");
    check(exp.size() == 4, "fifth request held back");
    check(cfg_src == 7'd10 && cfg_dst == 7'd50, "first pair");
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      cfg_ready = $urandom_range(0, 1);
      in_valid = $urandom_range(0, 1);
      in_instr = {7'($urandom_range(0, 99)), 4'hE, 4'($urandom), 7'($urandom_range(0, 99)), 4'($urandom)};
    end
    @(negedge clk); in_valid = 0; cfg_ready = 1;
    repeat (8) @(negedge clk);
    check(exp.size() == 0 && !cfg_valid, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
