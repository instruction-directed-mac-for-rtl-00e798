// lcu: local control unit of one quantum core (QC) under ID-MAC.
//
// The LCU listens to every packet on the wireless channel and runs the
// protocol's per-core processes:
//   BufferFillUp (dispatch phase): instruction packets addressed to this core
//     go to LIB (local instructions, FIFO), TPDB (teleportation destinations)
//     or TPSB (teleportation sources, kept sorted by token order "to").
//   LocalInstruction: executes LIB entries one after the other.
//   TPSInstruction: takes the TPSB head; unless its "to" is 0 it waits until
//     the token value last heard on the channel equals its "to"; executes the
//     source half of the teleportation (which yields two correction bits),
//     sends a correction-bits packet (CBP) to the destination qubit and then
//     a token packet with to+1, handing the medium to the next scheduled
//     source. Only cores that have a TPS ever touch the token.
//   TPDInstruction: a TPD waits in TPDB for the CBP addressed to its qubit,
//     then executes the correction with those bits; TPDs complete in any
//     order.
//   EndOfComputation: when LIB, TPSB and TPDB are empty and nothing is in
//     flight, sends an end-of-computation packet (EOCP) with the core id.
// The execution phase starts when the closing token (to = 0) of the dispatch
// phase is heard, provided the core was sent at least one instruction, and
// ends when the EOCP has been handed to the wireless interface.
//
// Interface: my_id is the core address. rx_valid/rx_pkt: packets heard.
// tx_valid/tx_ready/tx_pkt/tx_sched: packets to send (sched=1 for the
// token-ordered CBP/TP, 0 for the EOCP). The qubit hardware is driven through
// three execute ports loc_*, tps_* and tpd_*: valid (with the instruction)
// stays high until the matching done pulse; tps_cb returns the measured
// correction bits with tps_done. exec is high in the execution phase;
// tok_wait is high while a TPS is blocked waiting for its token; eoc pulses
// when the EOCP is handed over; error is sticky (buffer overflow or a CBP for
// a qubit with no pending TPD).
// Timing: a packet heard in cycle t is buffered by t+1; the three processes
// run concurrently; a CBP and its token leave back to back, each taking the
// medium for its flits (2 and 1 cycles).
// The processes follow the source description's algorithms; buffer depths,
// the start-on-token-0 rule and the token-value register are this design's.
module lcu
  import idmac_pkg::*;
#(
  parameter int unsigned LIB_DEPTH  = 16,
  parameter int unsigned TPSB_DEPTH = 16,
  parameter int unsigned TPDB_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [QC_W-1:0]   my_id,
  // wireless interface
  input  logic              rx_valid,
  input  pkt_t              rx_pkt,
  output logic              tx_valid,
  output pkt_t              tx_pkt,
  output logic              tx_sched,
  input  logic              tx_ready,
  // qubit hardware: local gates
  output logic              loc_valid,
  output gen_instr_t        loc_instr,
  input  logic              loc_done,
  // qubit hardware: teleportation source (pre-processing + measurement)
  output logic              tps_valid,
  output tps_instr_t        tps_instr,
  input  logic              tps_done,
  input  logic [CB_W-1:0]   tps_cb,
  // qubit hardware: teleportation destination (post-processing)
  output logic              tpd_valid,
  output tpd_instr_t        tpd_instr,
  output logic [CB_W-1:0]   tpd_cb,
  input  logic              tpd_done,
  // status
  output logic              exec,
  output logic              tok_wait,
  output logic              eoc,
  output logic              error
);
  // -------------------------------------------------- packet classification
  pkt_type_e ty;
  logic is_lip, is_tpd, is_tps, is_cbp, is_tp;

  assign ty     = pkt_type(rx_pkt);
  assign is_lip = rx_valid && ty == PKT_LIP   && instr_qc(lip_instr(rx_pkt))   == my_id;
  assign is_tpd = rx_valid && ty == PKT_TPDIP && instr_qc(tpdip_instr(rx_pkt)) == my_id;
  assign is_tps = rx_valid && ty == PKT_TPSIP && instr_qc(tpsip_instr(rx_pkt)) == my_id;
  assign is_cbp = rx_valid && ty == PKT_CBP   && cbp_dst(rx_pkt)[ABS_W-1 -: QC_W] == my_id;
  assign is_tp  = rx_valid && ty == PKT_TP;

  // --------------------------------------------------------------- buffers
  logic lib_empty, lib_full, lib_ovf;
  logic lib_pop;
  logic [GEN_W-1:0] lib_head;

  lib_fifo #(.WIDTH(GEN_W), .DEPTH(LIB_DEPTH)) u_lib (
    .clk, .rst_n,
    .push (is_lip), .din (as_gen(lip_instr(rx_pkt))),
    .pop  (lib_pop), .dout (lib_head),
    .empty(lib_empty), .full (lib_full), .overflow (lib_ovf)
  );

  tps_instr_t      tpsb_head;
  logic [TO_W-1:0] tpsb_head_to;
  logic tpsb_empty, tpsb_full, tpsb_ovf, tpsb_pop;

  tpsb #(.DEPTH(TPSB_DEPTH)) u_tpsb (
    .clk, .rst_n,
    .push (is_tps), .push_instr (as_tps(tpsip_instr(rx_pkt))), .push_to (tpsip_to(rx_pkt)),
    .pop  (tpsb_pop),
    .head_instr (tpsb_head), .head_to (tpsb_head_to),
    .empty(tpsb_empty), .full (tpsb_full), .overflow (tpsb_ovf)
  );

  logic            tpdb_out_valid, tpdb_pop, tpdb_empty, tpdb_full, tpdb_ovf, cb_unmatched;
  tpd_instr_t      tpdb_out_instr;
  logic [CB_W-1:0] tpdb_out_cb;
  logic [ABS_W-1:0] rx_dst;
  assign rx_dst = cbp_dst(rx_pkt);

  tpdb #(.DEPTH(TPDB_DEPTH)) u_tpdb (
    .clk, .rst_n,
    .push (is_tpd), .push_instr (as_tpd(tpdip_instr(rx_pkt))),
    .cb_valid (is_cbp), .cb_qubit (rx_dst[QB_W-1:0]), .cb (cbp_cb(rx_pkt)),
    .cb_unmatched (cb_unmatched),
    .out_valid (tpdb_out_valid), .out_instr (tpdb_out_instr), .out_cb (tpdb_out_cb),
    .out_pop (tpdb_pop),
    .empty (tpdb_empty), .full (tpdb_full), .overflow (tpdb_ovf)
  );

  // ------------------------------------------------- phase and token state
  logic            got_q;    // received an instruction in this bundle
  logic [TO_W-1:0] tok_q;    // last token value heard on the channel
  logic            eoc_go;

  // ------------------------------------------------------ LocalInstruction
  assign loc_valid = exec && !lib_empty;
  assign loc_instr = gen_instr_t'(lib_head);
  assign lib_pop   = loc_valid && loc_done;

  // -------------------------------------------------------- TPSInstruction
  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_CB, S_TP} tps_state_e;
  tps_state_e      s_q;
  logic [CB_W-1:0] cb_q;
  logic            tok_ok;

  assign tok_ok    = (tpsb_head_to == '0) || (tok_q == tpsb_head_to);
  assign tok_wait  = exec && !tpsb_empty && s_q == S_IDLE && !tok_ok;
  assign tps_valid = (s_q == S_EXEC);
  assign tps_instr = tpsb_head;
  assign tpsb_pop  = (s_q == S_TP) && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q  <= S_IDLE;
      cb_q <= '0;
    end else begin
      unique case (s_q)
        S_IDLE: if (exec && !tpsb_empty && tok_ok) s_q <= S_EXEC;
        S_EXEC: if (tps_done) begin
          cb_q <= tps_cb;
          s_q  <= S_CB;
        end
        S_CB:   if (tx_ready) s_q <= S_TP;
        S_TP:   if (tx_ready) s_q <= S_IDLE;
        default: s_q <= S_IDLE;
      endcase
    end
  end

  // -------------------------------------------------------- TPDInstruction
  logic            t_busy_q;
  tpd_instr_t      t_instr_q;
  logic [CB_W-1:0] t_cb_q;

  assign tpdb_pop  = exec && !t_busy_q && tpdb_out_valid;
  assign tpd_valid = t_busy_q;
  assign tpd_instr = t_instr_q;
  assign tpd_cb    = t_cb_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_busy_q  <= 1'b0;
      t_instr_q <= '0;
      t_cb_q    <= '0;
    end else if (tpdb_pop) begin
      t_busy_q  <= 1'b1;
      t_instr_q <= tpdb_out_instr;
      t_cb_q    <= tpdb_out_cb;
    end else if (t_busy_q && tpd_done) begin
      t_busy_q  <= 1'b0;
    end
  end

  // ------------------------------------------------------ EndOfComputation
  logic e_q;   // EOCP waiting for the wireless interface
  assign eoc_go = exec && got_q && !e_q && lib_empty && tpsb_empty && tpdb_empty &&
                  s_q == S_IDLE && !t_busy_q;
  assign eoc = e_q && tx_ready;

  // ------------------------------------------------------------- transmit
  always_comb begin
    tx_valid = 1'b0;
    tx_sched = 1'b1;
    tx_pkt   = '0;
    if (s_q == S_CB) begin
      tx_valid = 1'b1;
      tx_pkt   = make_cbp(tpsb_head.qd, cb_q);
    end else if (s_q == S_TP) begin
      tx_valid = 1'b1;
      tx_pkt   = make_tp(tpsb_head_to + 1'b1);
    end else if (e_q) begin
      tx_valid = 1'b1;
      tx_sched = 1'b0;
      tx_pkt   = make_eocp(my_id);
    end
  end

  // ---------------------------------------------------------- phase state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_q <= 1'b0;
      exec  <= 1'b0;
      tok_q <= '0;
      e_q   <= 1'b0;
      error <= 1'b0;
    end else begin
      if (is_lip || is_tpd || is_tps) got_q <= 1'b1;
      if (is_tp) tok_q <= tp_to(rx_pkt);
      if (is_tp && tp_to(rx_pkt) == '0 && got_q) exec <= 1'b1;
      if (eoc_go) e_q <= 1'b1;
      if (eoc) begin
        e_q   <= 1'b0;
        exec  <= 1'b0;
        got_q <= 1'b0;
      end
      if (lib_ovf || tpsb_ovf || tpdb_ovf || cb_unmatched) error <= 1'b1;
    end
  end

  // An instruction packet during execution would break the two-phase rule.
  a_no_dispatch_in_exec: assert property (@(posedge clk) disable iff (!rst_n)
    exec |-> !(is_lip || is_tpd || is_tps));

endmodule
