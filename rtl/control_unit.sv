// control_unit: global control unit (CU) of the multi-core system.
//
// The CU runs the program bundle by bundle. For each bundle it reads the
// header word (NI = number of instructions, in the low NI_W bits; NI = 0 ends
// the program), then for each instruction reads the word, spends
// DECODE_CYCLES cycles decoding it and hands it to the dispatcher, which
// turns it into a packet on the wireless channel (and configures the EPR
// controller for a TPS). The CU records which cores were sent instructions;
// after the bundle's closing token it waits until each of those cores has
// returned an end-of-computation packet (EOCP) and only then fetches the
// next bundle.
//
// Interface: start/start_addr begin a program; done stays high from the end
// of the program until the next start. mem_rd_en/mem_addr issue one read;
// the memory answers with mem_rvalid/mem_rdata after any latency. tx_*/rx_*
// are packet-level ports to the CU's wireless interface; tx_sched is tied
// high because every CU transmission belongs to the dispatch phase, which is
// scheduled by construction. epr_* configures the EPR generator. bundles
// counts completed bundles.
// Timing: per instruction, one cycle for the read request, the memory
// latency, DECODE_CYCLES cycles of decode and one cycle to hand it over
// (longer if the dispatcher or the EPR queue is still busy).
// Decode time (10 ns per instruction at 1 GHz) and the bundle layout (NI
// then the instructions) follow the source description; the serial
// fetch/decode and the header word with NI = 0 as program end are this
// design's choices.
module control_unit
  import idmac_pkg::*;
#(
  parameter int unsigned DECODE_CYCLES = 10,
  parameter int unsigned ADDR_W        = 16,
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
  // wireless interface (packet level)
  output logic              tx_valid,
  output pkt_t              tx_pkt,
  output logic              tx_sched,
  input  logic              tx_ready,
  input  logic              rx_valid,
  input  pkt_t              rx_pkt,
  // EPR generator configuration
  output logic              epr_cfg_valid,
  output logic [QC_W-1:0]   epr_cfg_src,
  output logic [QC_W-1:0]   epr_cfg_dst,
  input  logic              epr_cfg_ready
);
  localparam int unsigned DW = $clog2(DECODE_CYCLES + 1);

  typedef enum logic [2:0] {
    C_IDLE, C_HDR_RD, C_HDR_WAIT, C_INS_RD, C_INS_WAIT, C_DECODE, C_ISSUE, C_WAIT_EOC
  } state_e;

  state_e            state_q;
  logic [ADDR_W-1:0] addr_q;
  logic [NI_W-1:0]   left_q;
  instr_word_t       instr_q;
  logic [DW-1:0]     dec_q;
  logic [N_QC-1:0]   pending_q;
  logic              closed_q;   // closing token of the bundle sent

  // dispatcher <-> EPR controller
  logic        d_in_valid, d_in_ready;
  logic        epr_valid, epr_ready;
  instr_word_t epr_instr;
  logic        disp_valid, bundle_done;
  logic [QC_W-1:0] disp_qc;

  assign mem_rd_en  = (state_q == C_HDR_RD) || (state_q == C_INS_RD);
  assign mem_addr   = addr_q;
  assign d_in_valid = (state_q == C_ISSUE);
  assign tx_sched   = 1'b1;

  dispatcher u_disp (
    .clk, .rst_n,
    .in_valid   (d_in_valid),
    .in_instr   (instr_q),
    .in_last    (left_q == NI_W'(1)),
    .in_ready   (d_in_ready),
    .epr_valid  (epr_valid),
    .epr_instr  (epr_instr),
    .epr_ready  (epr_ready),
    .tx_valid   (tx_valid),
    .tx_pkt     (tx_pkt),
    .tx_ready   (tx_ready),
    .disp_valid (disp_valid),
    .disp_qc    (disp_qc),
    .bundle_done(bundle_done)
  );

  epr_ctrl #(.DEPTH(EPR_DEPTH)) u_epr (
    .clk, .rst_n,
    .in_valid  (epr_valid),
    .in_instr  (epr_instr),
    .in_ready  (epr_ready),
    .cfg_valid (epr_cfg_valid),
    .cfg_src   (epr_cfg_src),
    .cfg_dst   (epr_cfg_dst),
    .cfg_ready (epr_cfg_ready)
  );

  logic eoc_in;
  logic [QC_W-1:0] eoc_id;
  assign eoc_in = rx_valid && (pkt_type(rx_pkt) == PKT_EOCP);
  assign eoc_id = eocp_id(rx_pkt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= C_IDLE;
      addr_q    <= '0;
      left_q    <= '0;
      instr_q   <= '0;
      dec_q     <= '0;
      pending_q <= '0;
      closed_q  <= 1'b0;
      done      <= 1'b0;
      bundles   <= '0;
    end else begin
      // cores involved in the bundle / end-of-computation bookkeeping
      if (disp_valid) pending_q[disp_qc] <= 1'b1;
      if (eoc_in && int'(eoc_id) < N_QC) pending_q[eoc_id] <= 1'b0;
      if (bundle_done) closed_q <= 1'b1;

      unique case (state_q)
        C_IDLE: if (start) begin
          addr_q  <= start_addr;
          done    <= 1'b0;
          bundles <= '0;
          state_q <= C_HDR_RD;
        end
        C_HDR_RD: state_q <= C_HDR_WAIT;
        C_HDR_WAIT: if (mem_rvalid) begin
          addr_q <= addr_q + 1'b1;
          left_q <= mem_rdata[NI_W-1:0];
          if (mem_rdata[NI_W-1:0] == '0) begin
            done    <= 1'b1;
            state_q <= C_IDLE;
          end else begin
            state_q <= C_INS_RD;
          end
        end
        C_INS_RD: state_q <= C_INS_WAIT;
        C_INS_WAIT: if (mem_rvalid) begin
          instr_q <= mem_rdata;
          addr_q  <= addr_q + 1'b1;
          dec_q   <= DW'(DECODE_CYCLES);
          state_q <= (DECODE_CYCLES == 0) ? C_ISSUE : C_DECODE;
        end
        C_DECODE: begin
          dec_q <= dec_q - 1'b1;
          if (dec_q == DW'(1)) state_q <= C_ISSUE;
        end
        C_ISSUE: if (d_in_ready) begin
          left_q  <= left_q - 1'b1;
          state_q <= (left_q == NI_W'(1)) ? C_WAIT_EOC : C_INS_RD;
        end
        C_WAIT_EOC: if (closed_q && pending_q == '0 && !disp_valid) begin
          closed_q <= 1'b0;
          bundles  <= bundles + 1'b1;
          state_q  <= C_HDR_RD;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

endmodule
