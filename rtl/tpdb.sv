// tpdb: teleportation-destination buffer (TPDB) of a local control unit.
//
// A TPD instruction names the local qubit that will receive a teleported
// state. It waits in this buffer until the correction-bits packet (CBP) whose
// destination is that qubit arrives; the TPDInstruction process then executes
// it together with the two correction bits. TPDs are independent of each
// other ("parallel for"), so the buffer is associative: each entry holds the
// instruction, a flag saying its correction bits are in, and the bits.
//
// Interface: push/push_instr store a TPD in the lowest free entry (dropped and
// flagged in the sticky overflow when all entries are used). cb_valid/
// cb_qubit/cb deliver correction bits to the lowest-numbered waiting entry
// whose operand equals cb_qubit (a CBP that matches nothing is ignored and
// counted on cb_unmatched for one cycle). out_valid/out_instr/out_cb present
// the lowest-numbered entry whose bits have arrived; out_pop frees it.
// Timing: bits delivered in cycle t are offered on out_* from cycle t+1.
// Matching by operand address and the depth are this design's choices.
module tpdb
  import idmac_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  tpd_instr_t        push_instr,
  input  logic              cb_valid,
  input  logic [QB_W-1:0]   cb_qubit,
  input  logic [CB_W-1:0]   cb,
  output logic              cb_unmatched,
  output logic              out_valid,
  output tpd_instr_t        out_instr,
  output logic [CB_W-1:0]   out_cb,
  input  logic              out_pop,
  output logic              empty,
  output logic              full,
  output logic              overflow
);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic              valid_q   [DEPTH];
  logic              cbin_q    [DEPTH];
  logic [CB_W-1:0]   cb_q      [DEPTH];
  tpd_instr_t        instr_q   [DEPTH];

  logic          free_found, match_found, out_found;
  logic [IW-1:0] free_idx, match_idx, out_idx;

  always_comb begin
    free_found  = 1'b0; free_idx  = '0;
    match_found = 1'b0; match_idx = '0;
    out_found   = 1'b0; out_idx   = '0;
    empty = 1'b1;
    full  = 1'b1;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        free_found = 1'b1; free_idx = IW'(i);
      end
      if (valid_q[i] && !cbin_q[i] && instr_q[i].q == cb_qubit) begin
        match_found = 1'b1; match_idx = IW'(i);
      end
      if (valid_q[i] && cbin_q[i]) begin
        out_found = 1'b1; out_idx = IW'(i);
      end
      if (valid_q[i])  empty = 1'b0;
      if (!valid_q[i]) full  = 1'b0;
    end
  end

  assign out_valid    = out_found;
  assign out_instr    = instr_q[out_idx];
  assign out_cb       = cb_q[out_idx];
  assign cb_unmatched = cb_valid && !match_found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      overflow <= 1'b0;
      for (int i = 0; i < DEPTH; i++) begin
        valid_q[i] <= 1'b0;
        cbin_q[i]  <= 1'b0;
        cb_q[i]    <= '0;
        instr_q[i] <= '0;
      end
    end else begin
      if (out_pop && out_found) begin
        valid_q[out_idx] <= 1'b0;
        cbin_q[out_idx]  <= 1'b0;
      end
      if (cb_valid && match_found) begin
        cbin_q[match_idx] <= 1'b1;
        cb_q[match_idx]   <= cb;
      end
      if (push) begin
        if (free_found) begin
          valid_q[free_idx] <= 1'b1;
          cbin_q[free_idx]  <= 1'b0;
          instr_q[free_idx] <= push_instr;
        end else begin
          overflow <= 1'b1;
        end
      end
    end
  end

endmodule
