// tb_idmac_system: end-to-end test of the ID-MAC control plane at its
// default size (100 cores, 16 qubits each, the top's parameters untouched).
// A random program of N_BUNDLES bundles is generated and written to the
// instruction-memory model: each bundle mixes local one- and two-qubit gates
// with teleportations between random cores (a TPS on the source core, a TPD
// on the destination core), within the buffer depths. The qubit model
// answers with fixed latencies (gate 20, source 1390, destination 30 cycles,
// i.e. ns) and checks correction bits; the EPR generator model accepts one
// configuration every EPR_GAP cycles.
// Checks, from the packets heard on the channel: per bundle the instruction
// packets, then the closing token 0, then for k = 0..T-1 the correction bits
// of the k-th dispatched TPS (right destination and bits) followed by token
// k+1, and one EOCP per involved core; per core, the number of local, source
// and destination operations executed; no collision, schedule conflict or
// buffer error; done with the right bundle count.
// Mechanisms counted (each must occur): a TPS blocked waiting for its token;
// a token hand-over that skips idle cores; EOC packets contending for the
// medium; dispatch stalled by a full EPR queue; a TPD waiting for its bits.
`timescale 1ns/1ps
module tb_idmac_system;
  import idmac_pkg::*;
  localparam int N_BUNDLES = 30;
  localparam int EPR_GAP   = 150;

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
  longint cyc = 0;

  idmac_system dut (.*);

  instr_mem_model #(.ADDR_W(16), .LATENCY(2)) u_mem (
    .clk, .rd_en (mem_rd_en), .addr (mem_addr), .rvalid (mem_rvalid), .rdata (mem_rdata));

  qcore_model #(.LOC_LAT(20), .TPS_LAT(1390), .TPD_LAT(30)) u_q (
    .clk, .rst_n,
    .loc_valid (q_loc_valid), .loc_instr (q_loc_instr), .loc_done (q_loc_done),
    .tps_valid (q_tps_valid), .tps_instr (q_tps_instr), .tps_done (q_tps_done), .tps_cb (q_tps_cb),
    .tpd_valid (q_tpd_valid), .tpd_instr (q_tpd_instr), .tpd_cb (q_tpd_cb), .tpd_done (q_tpd_done),
    .n_loc, .n_tps, .n_tpd, .n_bad);

  // EPR generator: one configuration every EPR_GAP cycles
  int epr_cnt = 0;
  assign epr_cfg_ready = (epr_cnt == 0);
  always @(posedge clk) begin
    if (epr_cfg_valid && epr_cfg_ready) epr_cnt <= EPR_GAP;
    else if (epr_cnt > 0) epr_cnt <= epr_cnt - 1;
  end

  always #0.5 clk = ~clk;   // 1 GHz
  always @(posedge clk) cyc++;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  function automatic logic [CB_W-1:0] cb_of(logic [ABS_W-1:0] a);
    return a[1:0] ^ a[5:4] ^ a[9:8] ^ {1'b0, a[10]};
  endfunction

  // ------------------------------------------------------ program generator
  int exp_loc [N_QC], exp_tps [N_QC], exp_tpd [N_QC];
  int b_ni [N_BUNDLES];
  int b_ninvolved [N_BUNDLES];
  logic [ABS_W-1:0] b_tps_dst [N_BUNDLES][$];
  int               b_tps_src [N_BUNDLES][$];

  task automatic gen_program();
    int addr = 0;
    for (int b = 0; b < N_BUNDLES; b++) begin
      instr_word_t ins[$];
      int n_l [N_QC], n_s [N_QC], n_d [N_QC];
      bit involved [N_QC];
      bit used_dst [N_QC][QPC];
      int T, L, hdr;
      for (int i = 0; i < N_QC; i++) begin
        n_l[i] = 0; n_s[i] = 0; n_d[i] = 0; involved[i] = 0;
        for (int q = 0; q < QPC; q++) used_dst[i][q] = 0;
      end
      T = (b % 10 == 9) ? 16 : (b % 5 == 4) ? 7 : $urandom_range(0, 4);
      L = $urandom_range(1, 10);
      // teleportations: TPS and TPD appear in random positions
      for (int t = 0; t < T; t++) begin
        int a, d, qd;
        do begin
          // every tenth bundle one core sources most teleportations, so
          // its TPS buffer holds many entries at once
          a = (b % 10 == 9 && t < 12) ? (b * 3) % N_QC : $urandom_range(0, N_QC - 1);
          d = $urandom_range(0, N_QC - 1);
          qd = $urandom_range(0, QPC - 1);
        end while (a == d || n_s[a] >= QPC || n_d[d] >= QPC || used_dst[d][qd]);
        n_s[a]++; n_d[d]++; used_dst[d][qd] = 1;
        involved[a] = 1; involved[d] = 1;
        ins.push_back({7'(a), GATE_TPS, 4'($urandom), 7'(d), 4'(qd)});
        ins.push_back({7'(d), GATE_TPD, 4'(qd), 11'd0});
      end
      for (int l = 0; l < L; l++) begin
        int a;
        // a few cores get several gates so local work queues up in LIB
        do a = (l < 3) ? (b * 7) % N_QC : $urandom_range(0, N_QC - 1);
        while (n_l[a] >= 16);
        n_l[a]++; involved[a] = 1;
        ins.push_back({7'(a), 4'($urandom_range(0, 13)), 4'($urandom), 4'($urandom), 7'd0});
      end
      ins.shuffle();
      u_mem.mem[addr++] = instr_word_t'(ins.size());
      b_ni[b] = ins.size();
      foreach (ins[k]) begin
        u_mem.mem[addr++] = ins[k];
        if (instr_gate(ins[k]) == GATE_TPS) begin
          b_tps_dst[b].push_back(as_tps(ins[k]).qd);
          b_tps_src[b].push_back(int'(instr_qc(ins[k])));
        end
      end
      b_ninvolved[b] = 0;
      for (int i = 0; i < N_QC; i++) begin
        exp_loc[i] += n_l[i]; exp_tps[i] += n_s[i]; exp_tpd[i] += n_d[i];
        if (involved[i]) b_ninvolved[b]++;
      end
    end
    u_mem.mem[addr] = '0;
  endtask

  // ------------------------------------------------------ channel monitor
  int cur_b = 0;          // bundle being observed
  bit in_exec = 0;
  int n_instr_pk = 0, n_eoc = 0, k_tps = 0;
  bit expect_tp = 0;
  int m_tok_wait = 0, m_skip = 0, m_eoc_contend = 0, m_epr_stall = 0, m_tpd_wait = 0;
  int m_tok_pass = 0;
  longint b_start;

  // a core holding a TPD whose correction bits have not arrived yet
  logic [N_QC-1:0] tpd_wait;
  for (genvar i = 0; i < N_QC; i++) begin : g_mon
    assign tpd_wait[i] = qc_exec[i] && !dut.g_qc[i].u_lcu.tpdb_empty &&
                         !dut.g_qc[i].u_lcu.tpdb_out_valid && !dut.g_qc[i].u_lcu.t_busy_q;
  end

  always @(posedge clk) if (rst_n) begin
    // mechanisms
    if (qc_tok_wait != '0) m_tok_wait++;
    if ($countones(dut.ch_req & ~dut.ch_sched) >= 2) m_eoc_contend++;
    if (dut.u_cu.u_disp.state_q == dut.u_cu.u_disp.D_EPR && !dut.u_cu.u_disp.epr_ready) m_epr_stall++;
    if (tpd_wait != '0) m_tpd_wait++;
    // packets
    if (dut.cu_rx_valid) begin
      automatic pkt_t p = dut.cu_rx_pkt;
      case (pkt_type(p))
        PKT_LIP, PKT_TPDIP, PKT_TPSIP: begin
          check(!in_exec, "instruction packet only in dispatch phase");
          if (n_instr_pk == 0) b_start = cyc;
          n_instr_pk++;
        end
        PKT_TP: begin
          if (!in_exec) begin
            check(tp_to(p) == 0, "dispatch closed by token 0");
            check(n_instr_pk == b_ni[cur_b], $sformatf("bundle %0d: %0d instruction packets", cur_b, n_instr_pk));
            in_exec = 1; k_tps = 0; expect_tp = 0;
          end else begin
            check(expect_tp && int'(tp_to(p)) == k_tps, $sformatf("token %0d after CBP %0d", tp_to(p), k_tps));
            expect_tp = 0;
            m_tok_pass++;
          end
        end
        PKT_CBP: begin
          check(in_exec && !expect_tp, "CBP in turn");
          check(k_tps < b_tps_dst[cur_b].size() && cbp_dst(p) == b_tps_dst[cur_b][k_tps],
                $sformatf("bundle %0d CBP %0d goes to the %0d-th TPS destination", cur_b, k_tps, k_tps));
          check(cbp_cb(p) == cb_of(cbp_dst(p)), "correction bits carried");
          // the token came from the previous source: count hand-overs that
          // jump over cores a circulating token would have visited
          if (k_tps > 0 && k_tps < b_tps_src[cur_b].size() &&
              b_tps_src[cur_b][k_tps] != (b_tps_src[cur_b][k_tps-1] + 1) % N_QC) m_skip++;
          k_tps++; expect_tp = 1;
        end
        PKT_EOCP: begin
          check(in_exec, "EOC in execution phase");
          n_eoc++;
          if (n_eoc == b_ninvolved[cur_b]) begin
            check(k_tps == b_tps_dst[cur_b].size() && !expect_tp, "all teleportations done before last EOC");
            if (cur_b < 3 || cur_b == N_BUNDLES - 1)
              $display("bundle %0d: %0d instr, %0d TPS, %0d cores, %0d cycles", cur_b, b_ni[cur_b],
                       b_tps_dst[cur_b].size(), b_ninvolved[cur_b], cyc - b_start);
            cur_b++; in_exec = 0; n_instr_pk = 0; n_eoc = 0;
          end
        end
        default: check(0, "unknown packet type");
      endcase
    end
  end

  initial begin
    #2000000;  // 2 ms of simulated time
    failures++; $display("watchdog expired at bundle %0d", cur_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N_QC; i++) begin exp_loc[i] = 0; exp_tps[i] = 0; exp_tpd[i] = 0; end
    gen_program();
    repeat (4) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(cur_b == N_BUNDLES, $sformatf("all bundles observed (%0d)", cur_b));
    check(bundles == N_BUNDLES, "bundle counter");
    for (int i = 0; i < N_QC; i++) begin
      check(n_loc[i] == exp_loc[i], $sformatf("core %0d local ops %0d/%0d", i, n_loc[i], exp_loc[i]));
      check(n_tps[i] == exp_tps[i], $sformatf("core %0d TPS %0d/%0d", i, n_tps[i], exp_tps[i]));
      check(n_tpd[i] == exp_tpd[i], $sformatf("core %0d TPD %0d/%0d", i, n_tpd[i], exp_tpd[i]));
    end
    check(n_bad == 0, "qubit model saw only correct requests and bits");
    check(!collision && !sched_conflict, "medium collision-free");
    check(qc_error == '0, "no buffer error");
    $display("mechanisms: token-wait cycles %0d, token passes %0d, idle-core skips %0d, EOC contention %0d, EPR stall %0d, TPD wait %0d",
             m_tok_wait, m_tok_pass, m_skip, m_eoc_contend, m_epr_stall, m_tpd_wait);
    check(m_tok_wait > 0, "a TPS waited for its token");
    check(m_tok_pass > 0, "tokens were passed");
    check(m_skip > 0, "token skipped idle cores");
    check(m_eoc_contend > 0, "EOC packets contended for the medium");
    check(m_epr_stall > 0, "dispatch stalled on the EPR queue");
    check(m_tpd_wait > 0, "a TPD waited for its correction bits");
    $display("total cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
