// epr_ctrl: EPR controller inside the global control unit.
//
// For every teleportation the dispatcher sends out, an entangled (EPR) pair
// has to be produced and its two halves delivered to the source and the
// destination cores. This block takes each TPS instruction from the
// dispatcher, extracts the source core (the instruction's QC field) and the
// destination core (the QC part of the absolute destination-qubit address)
// and queues the pair in a small FIFO, from which the EPR generator is
// configured with a valid/ready handshake.
//
// Interface: in_valid/in_ready/in_instr (TPS from the dispatcher; in_ready
// low while the queue is full, which stalls dispatch), cfg_valid/cfg_ready/
// cfg_src/cfg_dst (to the EPR generator).
// Timing: a request accepted in cycle t is offered to the generator from
// t+1; one request per cycle.
// The source description only says that the EPR controller configures the
// generator; the (source, destination) request format and the queue depth
// are this design's choices.
module epr_ctrl
  import idmac_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  instr_word_t     in_instr,
  output logic            in_ready,
  output logic            cfg_valid,
  output logic [QC_W-1:0] cfg_src,
  output logic [QC_W-1:0] cfg_dst,
  input  logic            cfg_ready
);
  tps_instr_t          tps;
  logic [2*QC_W-1:0]   head;
  logic                empty, full, ovf;

  assign tps      = as_tps(in_instr);
  assign in_ready = !full;

  lib_fifo #(.WIDTH(2 * QC_W), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .push     (in_valid && !full),
    .din      ({tps.qc, tps.qd[ABS_W-1 -: QC_W]}),
    .pop      (cfg_valid && cfg_ready),
    .dout     (head),
    .empty    (empty),
    .full     (full),
    .overflow (ovf)
  );

  assign cfg_valid = !empty;
  assign {cfg_src, cfg_dst} = head;

  // the push is gated by !full, so the queue can never overflow
  a_no_ovf: assert property (@(posedge clk) disable iff (!rst_n) !ovf);

endmodule
