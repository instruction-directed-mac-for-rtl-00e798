// tb_idmac_workloads: runs the kinds of circuits the ID-MAC scheme is
// evaluated on through the full-size top (100 cores, 16 qubits each, no
// parameter overrides), one program after the other.
//
// Program 1, random circuit: for a system of N_USE cores, 16 x N_USE logical
// qubits and 160 x N_USE gates, half one-qubit and half two-qubit, on random
// qubits; logical qubit i lives on core i mod N_USE, local qubit i / N_USE.
// These sizes and the mapping are the evaluation's; N_USE = 10 instead of up
// to 100 keeps the run short (the evaluation sweeps 1..100 cores; the other
// cores simply stay idle here).
// Program 2, GHZ state on 4 cores with 9 qubits each: H on qubit 0, then a
// CNOT chain 0->1->...->24 over 25 logical qubits, qubit i on core i mod 4.
// The evaluation uses this size for its benchmark circuits; the placement
// here is a plain modulo, not an optimised mapping.
//
// Compilation used by the program generator (this test bench's own, kept
// simple): gates are placed as early as their qubits allow, one gate per
// qubit per bundle. A two-qubit gate on one core is one local instruction. A
// two-qubit gate across cores takes two bundles: first a TPS on the control
// qubit's core with the target qubit's absolute address as destination and a
// TPD on the target's core, then the gate itself as a local instruction on
// the target's core. Only the instruction stream matters to the classical
// plane, so qubit states are not tracked.
//
// Quantum latencies are those of the qubit model scaled by the quantum
// scaling factor QSF (in eighths): gate 20, teleportation source 1390 (EPR
// pair 1000 + pre-processing 390) and destination 30 cycles at QSF = 1.
// The EPR generator accepts a configuration every cycle.
//
// Checks per program: every bundle closes with token 0, each bundle's
// tokens follow its correction-bit packets in order 1, 2, ..., every involved
// core reports once; the bundle count, the per-core numbers of local, source
// and destination operations, the correction bits, and no medium or buffer
// error. Printed: cycles of each program, and the share of cycles in which
// the channel carries a flit.
`timescale 1ns/1ps
module tb_idmac_workloads;
  import idmac_pkg::*;
  localparam int N_USE = 10;          // cores used by the random circuit
  localparam int QSF8  = 4;           // QSF = QSF8 / 8
  localparam int GHZ_CORES = 4, GHZ_QPC = 9, GHZ_Q = 25;
  localparam int MAXB  = 4096;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [15:0] start_addr = 16'd0;
  logic [31:0] bundles;
  logic mem_rd_en, mem_rvalid;
  logic [15:0] mem_addr;
  instr_word_t mem_rdata;
  logic epr_cfg_valid, epr_cfg_ready;
  logic [QC_W-1:0] epr_cfg_src, epr_cfg_dst;
  logic            q_loc_valid [N_QC];
  gen_instr_t      q_loc_instr [N_QC];
  logic            q_loc_done  [N_QC];
  logic            q_tps_valid [N_QC];
  tps_instr_t      q_tps_instr [N_QC];
  logic            q_tps_done  [N_QC];
  logic [CB_W-1:0] q_tps_cb    [N_QC];
  logic            q_tpd_valid [N_QC];
  tpd_instr_t      q_tpd_instr [N_QC];
  logic [CB_W-1:0] q_tpd_cb    [N_QC];
  logic            q_tpd_done  [N_QC];
  logic [N_QC-1:0] qc_exec, qc_tok_wait, qc_error;
  logic collision, sched_conflict;
  int n_loc [N_QC], n_tps [N_QC], n_tpd [N_QC], n_bad;

  int checks = 0, failures = 0;
  longint cyc = 0, busy = 0;

  idmac_system dut (.*);

  instr_mem_model #(.ADDR_W(16), .LATENCY(2)) u_mem (
    .clk, .rd_en (mem_rd_en), .addr (mem_addr), .rvalid (mem_rvalid), .rdata (mem_rdata));

  qcore_model #(.LOC_LAT(20 * QSF8 / 8), .TPS_LAT(1390 * QSF8 / 8), .TPD_LAT(30 * QSF8 / 8)) u_q (
    .clk, .rst_n,
    .loc_valid (q_loc_valid), .loc_instr (q_loc_instr), .loc_done (q_loc_done),
    .tps_valid (q_tps_valid), .tps_instr (q_tps_instr), .tps_done (q_tps_done), .tps_cb (q_tps_cb),
    .tpd_valid (q_tpd_valid), .tpd_instr (q_tpd_instr), .tpd_cb (q_tpd_cb), .tpd_done (q_tpd_done),
    .n_loc, .n_tps, .n_tpd, .n_bad);

  assign epr_cfg_ready = 1'b1;

  always #0.5 clk = ~clk;   // 1 GHz
  always @(posedge clk) begin
    cyc++;
    if (dut.ch_rx_valid) busy++;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  // ------------------------------------------------------ program generator
  int exp_loc [N_QC], exp_tps [N_QC], exp_tpd [N_QC];
  int b_tps [MAXB], b_inv [MAXB];
  int nb;                  // bundles of the program being built
  int addr = 0;
  instr_word_t bq [MAXB][$];

  function automatic instr_word_t w_loc(int c, int g, int a, int b);
    return {7'(c), 4'(g), 4'(a), 4'(b), 7'd0};
  endfunction
  function automatic instr_word_t w_tps(int c, int qs, int dc, int dq);
    return {7'(c), GATE_TPS, 4'(qs), 7'(dc), 4'(dq)};
  endfunction
  function automatic instr_word_t w_tpd(int c, int q);
    return {7'(c), GATE_TPD, 4'(q), 11'd0};
  endfunction

  // place one gate; qubits are (core, local) pairs; ready[] is per logical qubit
  task automatic place(ref int ready [], input int qa, qb, n);
    int ca = qa % n, la = qa / n, L;
    if (qb < 0) begin
      L = ready[qa];
      bq[L].push_back(w_loc(ca, $urandom_range(0, 13), la, 0));
      ready[qa] = L + 1;
      exp_loc[ca]++;
    end else begin
      int cb = qb % n, lb = qb / n;
      L = (ready[qa] > ready[qb]) ? ready[qa] : ready[qb];
      if (ca == cb) begin
        bq[L].push_back(w_loc(ca, 3, la, lb));
        ready[qa] = L + 1; ready[qb] = L + 1;
        exp_loc[ca]++;
      end else begin
        bq[L].push_back(w_tps(ca, la, cb, lb));
        bq[L].push_back(w_tpd(cb, lb));
        bq[L + 1].push_back(w_loc(cb, 3, lb, lb));
        ready[qa] = L + 2; ready[qb] = L + 2;
        exp_tps[ca]++; exp_tpd[cb]++; exp_loc[cb]++;
      end
    end
    if (L + 2 > nb) nb = L + 2;
  endtask

  // write the bundles to memory (empty trailing bundles dropped), end marker
  task automatic emit();
    while (nb > 0 && bq[nb - 1].size() == 0) nb--;
    for (int b = 0; b < nb; b++) begin
      bit inv [N_QC];
      for (int i = 0; i < N_QC; i++) inv[i] = 0;
      bq[b].shuffle();
      u_mem.mem[addr++] = instr_word_t'(bq[b].size());
      b_tps[b] = 0; b_inv[b] = 0;
      foreach (bq[b][k]) begin
        u_mem.mem[addr++] = bq[b][k];
        if (instr_gate(bq[b][k]) == GATE_TPS) b_tps[b]++;
        inv[instr_qc(bq[b][k])] = 1;
      end
      foreach (inv[i]) if (inv[i]) b_inv[b]++;
      bq[b].delete();
    end
    u_mem.mem[addr++] = '0;
  endtask

  task automatic gen_random(int n);
    int ready [] = new[16 * n];
    foreach (ready[q]) ready[q] = 0;
    nb = 0;
    for (int g = 0; g < 160 * n; g++) begin
      int a = $urandom_range(0, 16 * n - 1);
      if (g % 2 == 0) place(ready, a, -1, n);
      else begin
        int b;
        do b = $urandom_range(0, 16 * n - 1); while (b == a);
        place(ready, a, b, n);
      end
    end
    emit();
  endtask

  task automatic gen_ghz();
    int ready [] = new[GHZ_Q];
    foreach (ready[q]) ready[q] = 0;
    check((GHZ_Q + GHZ_CORES - 1) / GHZ_CORES <= GHZ_QPC, "ghz: qubits per core within 9");
    nb = 0;
    place(ready, 0, -1, GHZ_CORES);
    for (int q = 0; q + 1 < GHZ_Q; q++) place(ready, q, q + 1, GHZ_CORES);
    emit();
  endtask

  // ------------------------------------------------------ channel monitor
  int cur_b = 0, k_cbp = 0, n_eoc = 0;
  bit in_exec = 0;
  always @(posedge clk) if (rst_n && dut.cu_rx_valid) begin
    automatic pkt_t p = dut.cu_rx_pkt;
    case (pkt_type(p))
      PKT_TP:
        if (!in_exec) begin
          check(tp_to(p) == 0, "dispatch closed by token 0");
          in_exec = 1; k_cbp = 0; n_eoc = 0;
        end else
          check(int'(tp_to(p)) == k_cbp, $sformatf("bundle %0d token %0d after %0d CBPs", cur_b, tp_to(p), k_cbp));
      PKT_CBP: begin
        check(in_exec, "CBP in execution phase");
        k_cbp++;
      end
      PKT_EOCP: begin
        n_eoc++;
        if (n_eoc == b_inv[cur_b]) begin
          check(k_cbp == b_tps[cur_b], $sformatf("bundle %0d: %0d of %0d teleportations", cur_b, k_cbp, b_tps[cur_b]));
          cur_b++; in_exec = 0;
        end
      end
      default: check(!in_exec, "instruction packet only in dispatch phase");
    endcase
  end

  task automatic run(string name, int at, int n_b);
    longint c0 = cyc, bz0 = busy;
    cur_b = 0; in_exec = 0;
    @(negedge clk); start_addr = 16'(at); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(cur_b == n_b, $sformatf("%s: bundles observed %0d of %0d", name, cur_b, n_b));
    check(bundles == 32'(n_b), $sformatf("%s: bundle counter", name));
    for (int i = 0; i < N_QC; i++) begin
      check(n_loc[i] == exp_loc[i], $sformatf("%s core %0d local ops %0d/%0d", name, i, n_loc[i], exp_loc[i]));
      check(n_tps[i] == exp_tps[i], $sformatf("%s core %0d TPS %0d/%0d", name, i, n_tps[i], exp_tps[i]));
      check(n_tpd[i] == exp_tpd[i], $sformatf("%s core %0d TPD %0d/%0d", name, i, n_tpd[i], exp_tpd[i]));
    end
    $display("%s: %0d bundles, %0d cycles, channel busy %0d cycles (%0d per mille)", name, n_b,
             cyc - c0, busy - bz0, (busy - bz0) * 1000 / (cyc - c0));
  endtask

  initial begin
    #5000000;  // 5 ms of simulated time
    failures++; $display("watchdog expired at bundle %0d", cur_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int p2, nb1, nb2;
    for (int i = 0; i < N_QC; i++) begin exp_loc[i] = 0; exp_tps[i] = 0; exp_tpd[i] = 0; end
    repeat (4) @(posedge clk); rst_n = 1;
    gen_random(N_USE);
    nb1 = nb;
    run($sformatf("random circuit, %0d cores", N_USE), 0, nb1);
    p2 = addr;
    gen_ghz();
    nb2 = nb;
    run("ghz, 4 cores x 9 qubits", p2, nb2);
    check(n_bad == 0, "qubit model saw only correct requests and bits");
    check(!collision && !sched_conflict, "medium collision-free");
    check(qc_error == '0, "no buffer error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
