// idmac_pkg: configuration constants, instruction and packet formats of the
// instruction-directed token MAC (ID-MAC) control plane.
//
// The system is a global control unit (CU) and N_QC quantum cores (QCs) that
// share one broadcast wireless channel. The CU dispatches instructions as
// packets; QCs that must send teleportation correction bits access the medium
// in a compile-time token order carried in the instructions themselves.
//
// Field widths follow the published bundle/instruction and packet layouts:
//   QC address     lg2(#QC)                    -> QC_W
//   gate type      lg2(#gate types)            -> GATE_W (16 gate types)
//   local qubit    lg2(#physical qubits / QC)  -> QB_W
//   absolute qubit QC address : local address  -> ABS_W
//   packet type    3 bits, token order / QC id lg2(#QC), correction bits 2.
// Own choices (not given by the source description): the numeric packet-type
// codes, the TPS/TPD gate codes, at most two operands per general
// instruction, and a 1 GHz clock so that the 12 Gb/s channel moves one 12-bit
// flit per cycle and a token packet (10 bits) takes exactly one cycle.
//
// Packets are held left-aligned in a PKT_W-bit vector: the type occupies the
// top three bits and the fields follow towards bit 0; unused low bits are 0.
package idmac_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int N_QC         = 100;  // quantum cores (largest evaluated system)
  localparam int QPC          = 16;   // physical qubits per QC
  localparam int N_GATE_TYPES = 16;   // instruction set size
  localparam int FLIT_W       = 12;   // bits per cycle on the wireless channel

  localparam int QC_W   = $clog2(N_QC);
  localparam int QB_W   = $clog2(QPC);
  localparam int GATE_W = $clog2(N_GATE_TYPES);
  localparam int ABS_W  = QC_W + QB_W;
  localparam int TO_W   = QC_W;
  localparam int CB_W   = 2;
  localparam int TYPE_W = 3;
  // NI field: lg2 of the largest bundle (one instruction per qubit at most)
  localparam int NI_W   = $clog2(N_QC * QPC + 1);

  // ----------------------------------------------------------- gate codes
  typedef logic [GATE_W-1:0] gate_t;
  localparam gate_t GATE_TPS = gate_t'(N_GATE_TYPES - 2);
  localparam gate_t GATE_TPD = gate_t'(N_GATE_TYPES - 1);

  // --------------------------------------------------------- instructions
  // General instruction: QC, gate type, up to two local operands.
  typedef struct packed {
    logic [QC_W-1:0] qc;
    gate_t           gate;
    logic [QB_W-1:0] q1;
    logic [QB_W-1:0] q2;
  } gen_instr_t;

  // TPS: the destination operand keeps its absolute address.
  typedef struct packed {
    logic [QC_W-1:0]  qc;
    gate_t            gate;
    logic [QB_W-1:0]  qs;
    logic [ABS_W-1:0] qd;
  } tps_instr_t;

  // TPD: one local operand (the qubit that receives the state).
  typedef struct packed {
    logic [QC_W-1:0] qc;
    gate_t           gate;
    logic [QB_W-1:0] q;
  } tpd_instr_t;

  localparam int GEN_W   = $bits(gen_instr_t);
  localparam int TPS_W   = $bits(tps_instr_t);
  localparam int TPD_W   = $bits(tpd_instr_t);
  // A memory word holds any instruction, left-aligned.
  localparam int INSTR_W = TPS_W;
  typedef logic [INSTR_W-1:0] instr_word_t;

  function automatic logic [QC_W-1:0] instr_qc(instr_word_t w);
    return w[INSTR_W-1 -: QC_W];
  endfunction
  function automatic gate_t instr_gate(instr_word_t w);
    return w[INSTR_W-QC_W-1 -: GATE_W];
  endfunction
  function automatic gen_instr_t as_gen(instr_word_t w);
    return gen_instr_t'(w[INSTR_W-1 -: GEN_W]);
  endfunction
  function automatic tps_instr_t as_tps(instr_word_t w);
    return tps_instr_t'(w);
  endfunction
  function automatic tpd_instr_t as_tpd(instr_word_t w);
    return tpd_instr_t'(w[INSTR_W-1 -: TPD_W]);
  endfunction

  // -------------------------------------------------------------- packets
  typedef enum logic [TYPE_W-1:0] {
    PKT_LIP   = 3'd0,  // local instruction
    PKT_TPDIP = 3'd1,  // teleportation-destination instruction
    PKT_TPSIP = 3'd2,  // teleportation-source instruction + token order
    PKT_CBP   = 3'd3,  // correction bits
    PKT_TP    = 3'd4,  // token
    PKT_EOCP  = 3'd5   // end of computation
  } pkt_type_e;

  localparam int LIP_BITS   = TYPE_W + GEN_W;
  localparam int TPDIP_BITS = TYPE_W + TPD_W;
  localparam int TPSIP_BITS = TYPE_W + TPS_W + TO_W;
  localparam int CBP_BITS   = TYPE_W + ABS_W + CB_W;
  localparam int TP_BITS    = TYPE_W + TO_W;
  localparam int EOCP_BITS  = TYPE_W + QC_W;
  localparam int PKT_W      = TPSIP_BITS;  // the longest packet
  localparam int MAX_FLITS  = (PKT_W + FLIT_W - 1) / FLIT_W;
  localparam int FLITS_W    = $clog2(MAX_FLITS + 1);

  typedef logic [PKT_W-1:0] pkt_t;

  function automatic pkt_type_e pkt_type(pkt_t p);
    return pkt_type_e'(p[PKT_W-1 -: TYPE_W]);
  endfunction

  function automatic int unsigned pkt_bits(logic [TYPE_W-1:0] t);
    case (t)
      PKT_LIP:   return LIP_BITS;
      PKT_TPDIP: return TPDIP_BITS;
      PKT_TPSIP: return TPSIP_BITS;
      PKT_CBP:   return CBP_BITS;
      PKT_TP:    return TP_BITS;
      PKT_EOCP:  return EOCP_BITS;
      default:   return TYPE_W;
    endcase
  endfunction

  // Number of FLIT_W-bit flits the packet occupies on the medium.
  function automatic logic [FLITS_W-1:0] pkt_flits(logic [TYPE_W-1:0] t);
    return FLITS_W'((pkt_bits(t) + FLIT_W - 1) / FLIT_W);
  endfunction

  // Packet builders (MakeInstructionPacket, MakeCBPacket, MakeTokenPacket,
  // MakeEOCPacket).
  function automatic pkt_t make_lip(instr_word_t w);
    pkt_t p = '0;
    p[PKT_W-1 -: LIP_BITS] = {PKT_LIP, w[INSTR_W-1 -: GEN_W]};
    return p;
  endfunction
  function automatic pkt_t make_tpdip(instr_word_t w);
    pkt_t p = '0;
    p[PKT_W-1 -: TPDIP_BITS] = {PKT_TPDIP, w[INSTR_W-1 -: TPD_W]};
    return p;
  endfunction
  function automatic pkt_t make_tpsip(instr_word_t w, logic [TO_W-1:0] to);
    return {PKT_TPSIP, w, to};
  endfunction
  function automatic pkt_t make_cbp(logic [ABS_W-1:0] dst, logic [CB_W-1:0] cb);
    pkt_t p = '0;
    p[PKT_W-1 -: CBP_BITS] = {PKT_CBP, dst, cb};
    return p;
  endfunction
  function automatic pkt_t make_tp(logic [TO_W-1:0] to);
    pkt_t p = '0;
    p[PKT_W-1 -: TP_BITS] = {PKT_TP, to};
    return p;
  endfunction
  function automatic pkt_t make_eocp(logic [QC_W-1:0] id);
    pkt_t p = '0;
    p[PKT_W-1 -: EOCP_BITS] = {PKT_EOCP, id};
    return p;
  endfunction

  // Field extractors.
  function automatic instr_word_t lip_instr(pkt_t p);
    instr_word_t w = '0;
    w[INSTR_W-1 -: GEN_W] = p[PKT_W-TYPE_W-1 -: GEN_W];
    return w;
  endfunction
  function automatic instr_word_t tpdip_instr(pkt_t p);
    instr_word_t w = '0;
    w[INSTR_W-1 -: TPD_W] = p[PKT_W-TYPE_W-1 -: TPD_W];
    return w;
  endfunction
  function automatic instr_word_t tpsip_instr(pkt_t p);
    return p[PKT_W-TYPE_W-1 -: INSTR_W];
  endfunction
  function automatic logic [TO_W-1:0] tpsip_to(pkt_t p);
    return p[TO_W-1:0];
  endfunction
  function automatic logic [ABS_W-1:0] cbp_dst(pkt_t p);
    return p[PKT_W-TYPE_W-1 -: ABS_W];
  endfunction
  function automatic logic [CB_W-1:0] cbp_cb(pkt_t p);
    return p[PKT_W-TYPE_W-ABS_W-1 -: CB_W];
  endfunction
  function automatic logic [TO_W-1:0] tp_to(pkt_t p);
    return p[PKT_W-TYPE_W-1 -: TO_W];
  endfunction
  function automatic logic [QC_W-1:0] eocp_id(pkt_t p);
    return p[PKT_W-TYPE_W-1 -: QC_W];
  endfunction

endpackage
