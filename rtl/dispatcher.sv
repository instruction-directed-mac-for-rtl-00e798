// dispatcher: the dispatch unit of the global control unit.
//
// It receives the decoded instructions of one bundle, one at a time, and for
// each builds the instruction packet the ID-MAC protocol defines:
//   - TPS (teleportation source)      -> TPSIP, carrying token order "to"
//   - TPD (teleportation destination) -> TPDIP
//   - any other gate                  -> LIP
// Token orders are handed out 0, 1, 2, ... to the TPS instructions of a bundle
// in the order they are dispatched; they tell each source core when it may
// use the wireless medium during execution. For a TPS the EPR controller is
// configured first (so the entangled pair can be prepared for that source and
// destination), then the packet is sent. Packets go out strictly one after
// the other: during dispatch only the dispatcher transmits.
// After the last instruction of a bundle the dispatcher broadcasts a token
// packet with to=0, which ends the dispatch phase and starts execution in the
// cores (the core holding to=0 may transmit at once, as the protocol says).
//
// Interface: in_valid/in_ready/in_instr/in_last (instruction stream),
// epr_valid/epr_ready/epr_instr (TPS to the EPR controller), tx_valid/
// tx_ready/tx_pkt (packets to the wireless interface; every access is a
// scheduled one), disp_valid/disp_qc (pulse per instruction packet sent, with
// the addressed core) and bundle_done (pulse when the closing token is sent).
// Timing: one instruction is accepted in cycle t when idle; its packet is
// offered from t+1 (after the EPR handshake for a TPS); the next instruction
// is accepted in the cycle after the packet is taken.
// Packet contents and the token-order rule follow the source description;
// the closing to=0 token and the handshakes are this design's choices.
module dispatcher
  import idmac_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  instr_word_t     in_instr,
  input  logic            in_last,
  output logic            in_ready,
  output logic            epr_valid,
  output instr_word_t     epr_instr,
  input  logic            epr_ready,
  output logic            tx_valid,
  output pkt_t            tx_pkt,
  input  logic            tx_ready,
  output logic            disp_valid,
  output logic [QC_W-1:0] disp_qc,
  output logic            bundle_done
);
  typedef enum logic [1:0] {D_IDLE, D_EPR, D_TX, D_TOK} state_e;

  state_e          state_q;
  instr_word_t     instr_q;
  logic            last_q;
  pkt_t            pkt_q;
  logic [TO_W-1:0] to_q;

  assign in_ready    = (state_q == D_IDLE);
  assign epr_valid   = (state_q == D_EPR);
  assign epr_instr   = instr_q;
  assign tx_valid    = (state_q == D_TX) || (state_q == D_TOK);
  assign tx_pkt      = (state_q == D_TOK) ? make_tp('0) : pkt_q;
  assign disp_valid  = (state_q == D_TX) && tx_ready;
  assign disp_qc     = instr_qc(instr_q);
  assign bundle_done = (state_q == D_TOK) && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= D_IDLE;
      instr_q <= '0;
      last_q  <= 1'b0;
      pkt_q   <= '0;
      to_q    <= '0;
    end else begin
      unique case (state_q)
        D_IDLE: if (in_valid) begin
          instr_q <= in_instr;
          last_q  <= in_last;
          // MakeInstructionPacket
          if (instr_gate(in_instr) == GATE_TPS) begin
            pkt_q   <= make_tpsip(in_instr, to_q);
            to_q    <= to_q + 1'b1;
            state_q <= D_EPR;
          end else if (instr_gate(in_instr) == GATE_TPD) begin
            pkt_q   <= make_tpdip(in_instr);
            state_q <= D_TX;
          end else begin
            pkt_q   <= make_lip(in_instr);
            state_q <= D_TX;
          end
        end
        D_EPR: if (epr_ready) state_q <= D_TX;
        D_TX:  if (tx_ready)  state_q <= last_q ? D_TOK : D_IDLE;
        D_TOK: if (tx_ready) begin
          to_q    <= '0;
          state_q <= D_IDLE;
        end
        default: state_q <= D_IDLE;
      endcase
    end
  end

endmodule
