// idmac_system: classical control plane of a multi-core quantum processor
// with the instruction-directed token MAC (ID-MAC).
//
// One global control unit (fetch, decode, dispatcher, EPR controller) and
// N_QC local control units (one per quantum core) each own a wireless
// interface on a single shared broadcast channel. A program is a sequence of
// instruction bundles. For each bundle:
//   1. dispatch phase: the CU sends every instruction as a packet (LIP, TPDIP
//      or TPSIP); TPS instructions carry a token order 0, 1, 2, ... so that
//      the compile-time schedule of teleportations travels with the code.
//      The phase ends with a token packet to = 0.
//   2. execution phase: every core with work runs its local gates; the core
//      holding to = 0 executes its teleportation source, sends the correction
//      bits to the destination core and passes the token (to = 1) straight
//      to the next scheduled source, skipping every core that has nothing to
//      send; destination cores finish their teleportations when the bits
//      arrive. Each core then reports end of computation and the CU moves on.
//
// The quantum side (qubits, EPR generator, photonic links) and the off-chip
// instruction memory are outside this module; their interfaces are ports:
// mem_* (one read per request, answered by mem_rvalid), epr_cfg_* (source and
// destination core of each EPR pair), and per core the execute ports q_loc_*,
// q_tps_* and q_tpd_* (valid held until the matching done; q_tps_cb returns
// the measured correction bits). qc_exec, qc_tok_wait and qc_error expose
// each core's phase, token wait and sticky error; collision and
// sched_conflict are sticky medium errors that must stay low.
// Port 0 of the channel belongs to the CU, port 1 + i to core i.
// Timing: 1 cycle = 1 ns; a 12-bit flit per cycle on the channel (12 Gb/s);
// a token packet takes one cycle; decode is DECODE_CYCLES per instruction.
// The two phases, the packet kinds and the token-order rule follow the
// source description; the closing to = 0 token, the arbitration of the
// end-of-computation packets and the buffer depths (16, one per qubit of a
// core) are this design's own choices.
module idmac_system
  import idmac_pkg::*;
#(
  parameter int unsigned DECODE_CYCLES = 10,
  parameter int unsigned ADDR_W        = 16,
  parameter int unsigned LIB_DEPTH     = 16,
  parameter int unsigned TPSB_DEPTH    = 16,
  parameter int unsigned TPDB_DEPTH    = 16,
  parameter int unsigned EPR_DEPTH     = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] start_addr,
  output logic              done,
  output logic [31:0]       bundles,
  // instruction memory
  output logic              mem_rd_en,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic              mem_rvalid,
  input  instr_word_t       mem_rdata,
  // EPR generator
  output logic              epr_cfg_valid,
  output logic [QC_W-1:0]   epr_cfg_src,
  output logic [QC_W-1:0]   epr_cfg_dst,
  input  logic              epr_cfg_ready,
  // qubit hardware of each core
  output logic              q_loc_valid [N_QC],
  output gen_instr_t        q_loc_instr [N_QC],
  input  logic              q_loc_done  [N_QC],
  output logic              q_tps_valid [N_QC],
  output tps_instr_t        q_tps_instr [N_QC],
  input  logic              q_tps_done  [N_QC],
  input  logic [CB_W-1:0]   q_tps_cb    [N_QC],
  output logic              q_tpd_valid [N_QC],
  output tpd_instr_t        q_tpd_instr [N_QC],
  output logic [CB_W-1:0]   q_tpd_cb    [N_QC],
  input  logic              q_tpd_done  [N_QC],
  // status
  output logic [N_QC-1:0]   qc_exec,
  output logic [N_QC-1:0]   qc_tok_wait,
  output logic [N_QC-1:0]   qc_error,
  output logic              collision,
  output logic              sched_conflict
);
  localparam int unsigned NP = N_QC + 1;

  // channel side of every wireless interface
  logic [NP-1:0]     ch_req, ch_sched, ch_grant, ch_tx_valid;
  logic [FLIT_W-1:0] ch_tx_flit [NP];
  logic              ch_rx_valid;
  logic [FLIT_W-1:0] ch_rx_flit;

  winoc_channel #(.N_PORTS(NP)) u_channel (
    .clk, .rst_n,
    .req (ch_req), .sched (ch_sched), .grant (ch_grant),
    .tx_valid (ch_tx_valid), .tx_flit (ch_tx_flit),
    .rx_valid (ch_rx_valid), .rx_flit (ch_rx_flit),
    .collision (collision), .sched_conflict (sched_conflict)
  );

  // ------------------------------------------------------------ control unit
  logic cu_tx_valid, cu_tx_sched, cu_tx_ready, cu_rx_valid;
  pkt_t cu_tx_pkt, cu_rx_pkt;

  control_unit #(
    .DECODE_CYCLES (DECODE_CYCLES), .ADDR_W (ADDR_W), .EPR_DEPTH (EPR_DEPTH)
  ) u_cu (
    .clk, .rst_n,
    .start, .start_addr, .done, .bundles,
    .mem_rd_en, .mem_addr, .mem_rvalid, .mem_rdata,
    .tx_valid (cu_tx_valid), .tx_pkt (cu_tx_pkt), .tx_sched (cu_tx_sched),
    .tx_ready (cu_tx_ready),
    .rx_valid (cu_rx_valid), .rx_pkt (cu_rx_pkt),
    .epr_cfg_valid, .epr_cfg_src, .epr_cfg_dst, .epr_cfg_ready
  );

  wireless_interface u_cu_wi (
    .clk, .rst_n,
    .tx_valid (cu_tx_valid), .tx_pkt (cu_tx_pkt), .tx_sched (cu_tx_sched),
    .tx_ready (cu_tx_ready),
    .rx_valid (cu_rx_valid), .rx_pkt (cu_rx_pkt),
    .ch_req (ch_req[0]), .ch_sched (ch_sched[0]), .ch_grant (ch_grant[0]),
    .ch_tx_valid (ch_tx_valid[0]), .ch_tx_flit (ch_tx_flit[0]),
    .ch_rx_valid, .ch_rx_flit
  );

  // ------------------------------------------------------------ quantum cores
  for (genvar i = 0; i < N_QC; i++) begin : g_qc
    logic tx_valid, tx_sched, tx_ready, rx_valid;
    pkt_t tx_pkt, rx_pkt;

    lcu #(
      .LIB_DEPTH (LIB_DEPTH), .TPSB_DEPTH (TPSB_DEPTH), .TPDB_DEPTH (TPDB_DEPTH)
    ) u_lcu (
      .clk, .rst_n,
      .my_id     (QC_W'(i)),
      .rx_valid, .rx_pkt,
      .tx_valid, .tx_pkt, .tx_sched, .tx_ready,
      .loc_valid (q_loc_valid[i]), .loc_instr (q_loc_instr[i]), .loc_done (q_loc_done[i]),
      .tps_valid (q_tps_valid[i]), .tps_instr (q_tps_instr[i]), .tps_done (q_tps_done[i]),
      .tps_cb    (q_tps_cb[i]),
      .tpd_valid (q_tpd_valid[i]), .tpd_instr (q_tpd_instr[i]), .tpd_cb (q_tpd_cb[i]),
      .tpd_done  (q_tpd_done[i]),
      .exec      (qc_exec[i]),
      .tok_wait  (qc_tok_wait[i]),
      .eoc       (),  // the EOCP itself tells the control unit
      .error     (qc_error[i])
    );

    wireless_interface u_wi (
      .clk, .rst_n,
      .tx_valid, .tx_pkt, .tx_sched, .tx_ready,
      .rx_valid, .rx_pkt,
      .ch_req (ch_req[i+1]), .ch_sched (ch_sched[i+1]), .ch_grant (ch_grant[i+1]),
      .ch_tx_valid (ch_tx_valid[i+1]), .ch_tx_flit (ch_tx_flit[i+1]),
      .ch_rx_valid, .ch_rx_flit
    );
  end

endmodule
