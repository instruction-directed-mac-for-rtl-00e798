// qcore_model: behavioural stand-in for the qubit hardware of all cores.
// Not design content: it answers the execute requests of every local
// control unit after fixed latencies and checks what it is asked to do.
//   local gate:           done after LOC_LAT cycles
//   teleportation source: done after TPS_LAT cycles (EPR generation plus
//                         pre-processing), returning correction bits
//                         cb_of(destination address)
//   teleportation dest.:  done after TPD_LAT cycles (post-processing); the
//                         bits it receives must equal cb_of(its own qubit),
//                         i.e. those measured at the matching source.
// Every request must name the core it is sent to. Per-core counters and a
// mismatch counter are outputs for the testbench.
`timescale 1ns/1ps
module qcore_model
  import idmac_pkg::*;
#(
  parameter int unsigned LOC_LAT = 20,
  parameter int unsigned TPS_LAT = 1390,
  parameter int unsigned TPD_LAT = 30
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            loc_valid [N_QC],
  input  gen_instr_t      loc_instr [N_QC],
  output logic            loc_done  [N_QC],
  input  logic            tps_valid [N_QC],
  input  tps_instr_t      tps_instr [N_QC],
  output logic            tps_done  [N_QC],
  output logic [CB_W-1:0] tps_cb    [N_QC],
  input  logic            tpd_valid [N_QC],
  input  tpd_instr_t      tpd_instr [N_QC],
  input  logic [CB_W-1:0] tpd_cb    [N_QC],
  output logic            tpd_done  [N_QC],
  output int              n_loc     [N_QC],
  output int              n_tps     [N_QC],
  output int              n_tpd     [N_QC],
  output int              n_bad
);
  function automatic logic [CB_W-1:0] cb_of(logic [ABS_W-1:0] a);
    return a[1:0] ^ a[5:4] ^ a[9:8] ^ {1'b0, a[10]};
  endfunction

  int lc [N_QC], tc [N_QC], dc [N_QC];

  initial n_bad = 0;

  for (genvar i = 0; i < N_QC; i++) begin : g
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        loc_done[i] <= 0; tps_done[i] <= 0; tpd_done[i] <= 0; tps_cb[i] <= '0;
        lc[i] = 0; tc[i] = 0; dc[i] = 0;
        n_loc[i] <= 0; n_tps[i] <= 0; n_tpd[i] <= 0;
      end else begin
        loc_done[i] <= 0; tps_done[i] <= 0; tpd_done[i] <= 0;
        if (loc_valid[i] && !loc_done[i]) begin
          if (lc[i] == 0 && int'(loc_instr[i].qc) != i) n_bad++;
          lc[i]++;
          if (lc[i] >= LOC_LAT) begin loc_done[i] <= 1; lc[i] = 0; n_loc[i] <= n_loc[i] + 1; end
        end
        if (tps_valid[i] && !tps_done[i]) begin
          if (tc[i] == 0 && (int'(tps_instr[i].qc) != i || tps_instr[i].gate != GATE_TPS)) n_bad++;
          tc[i]++;
          if (tc[i] >= TPS_LAT) begin
            tps_done[i] <= 1; tps_cb[i] <= cb_of(tps_instr[i].qd); tc[i] = 0;
            n_tps[i] <= n_tps[i] + 1;
          end
        end
        if (tpd_valid[i] && !tpd_done[i]) begin
          if (dc[i] == 0 && (int'(tpd_instr[i].qc) != i ||
                             tpd_cb[i] != cb_of({tpd_instr[i].qc, tpd_instr[i].q}))) n_bad++;
          dc[i]++;
          if (dc[i] >= TPD_LAT) begin tpd_done[i] <= 1; dc[i] = 0; n_tpd[i] <= n_tpd[i] + 1; end
        end
      end
    end
  end
endmodule
