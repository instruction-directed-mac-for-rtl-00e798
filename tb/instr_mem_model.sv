// instr_mem_model: behavioural stand-in for the off-chip instruction memory.
// Not synthesizable design content: it only lets testbenches run programs.
// A read request (rd_en, addr) is answered LATENCY cycles later by rvalid
// with the word; requests may be issued back to back. The memory array
// `mem` is filled by the testbench through hierarchical writes.
`timescale 1ns/1ps
module instr_mem_model
  import idmac_pkg::*;
#(
  parameter int unsigned ADDR_W  = 16,
  parameter int unsigned LATENCY = 1
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] addr,
  output logic              rvalid,
  output instr_word_t       rdata
);
  instr_word_t mem [2**ADDR_W];
  logic              v_pipe [LATENCY];
  instr_word_t       d_pipe [LATENCY];

  initial for (int i = 0; i < 2**ADDR_W; i++) mem[i] = '0;

  always @(posedge clk) begin
    v_pipe[0] <= rd_en;
    d_pipe[0] <= mem[addr];
    for (int i = 1; i < LATENCY; i++) begin
      v_pipe[i] <= v_pipe[i-1];
      d_pipe[i] <= d_pipe[i-1];
    end
  end
  assign rvalid = v_pipe[LATENCY-1];
  assign rdata  = d_pipe[LATENCY-1];
endmodule
