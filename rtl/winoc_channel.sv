// winoc_channel: the shared wireless medium of the classical plane.
//
// All wireless interfaces (port 0 = control unit, port 1+i = quantum core i)
// share one broadcast channel: whatever the current owner transmits is heard
// by every interface, one cycle later (the radio hop). Only one owner may
// transmit at a time.
//
// Ownership: ID-MAC makes most accesses collision-free by construction. During
// dispatch only the dispatcher talks; during execution only the holder of the
// current token order sends its correction bits and the next token. Such
// requests are flagged "scheduled" (sched=1) and, by the protocol, at most one
// is pending at a time; they win whenever the medium is free. Requests the
// protocol does not schedule (end-of-computation packets) are flagged
// sched=0 and are granted round-robin when no scheduled request is waiting.
// An owner keeps the medium until it lowers req, so multi-flit packets are
// never interleaved.
//
// Interface: per port req/sched/tx_valid/tx_flit in, grant out; rx_valid/
// rx_flit broadcast out. collision is sticky and set when two ports drive a
// flit in the same cycle or a port transmits without the grant;
// sched_conflict is sticky and set when two scheduled requests are pending at
// once (the compile-time schedule was violated).
// Timing: the grant is registered, so a request raised in cycle t (medium
// free) is granted in t+1; flits sent in cycle t appear on rx_* in t+1.
// The scheduled/unscheduled split and the round-robin for end-of-computation
// packets are this design's own choices: the source description does not say
// how those packets reach the medium.
module winoc_channel
  import idmac_pkg::*;
#(
  parameter int unsigned N_PORTS = N_QC + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_PORTS-1:0] req,
  input  logic [N_PORTS-1:0] sched,
  output logic [N_PORTS-1:0] grant,
  input  logic [N_PORTS-1:0] tx_valid,
  input  logic [FLIT_W-1:0]  tx_flit [N_PORTS],
  output logic               rx_valid,
  output logic [FLIT_W-1:0]  rx_flit,
  output logic               collision,
  output logic               sched_conflict
);
  localparam int unsigned IW = $clog2(N_PORTS);

  logic          own_v_q;
  logic [IW-1:0] own_q;
  logic [IW-1:0] rr_q;       // port after the last unscheduled owner

  logic          pick_v;
  logic [IW-1:0] pick;
  logic          sched_found;
  logic [IW:0]   n_sched;
  logic [IW:0]   n_tx;
  logic          own_keeps;
  logic          rr_found;
  logic [IW-1:0] rr_pick;
  logic [FLIT_W-1:0] flit_mux;

  assign own_keeps = own_v_q && req[own_q];

  always_comb begin
    // scheduled requests: lowest index (at most one is expected)
    sched_found = 1'b0;
    pick        = '0;
    n_sched     = '0;
    for (int i = N_PORTS - 1; i >= 0; i--) begin
      if (req[i] && sched[i]) begin
        sched_found = 1'b1;
        pick        = IW'(i);
        n_sched     = n_sched + 1'b1;
      end
    end
    // unscheduled requests: round robin starting at rr_q
    rr_found = 1'b0;
    rr_pick  = '0;
    for (int k = 0; k < N_PORTS; k++) begin
      int unsigned j;
      j = (int'(rr_q) + k) % N_PORTS;
      if (!rr_found && req[j] && !sched[j]) begin
        rr_found = 1'b1;
        rr_pick  = IW'(j);
      end
    end
    pick_v = sched_found || rr_found;
    if (!sched_found) pick = rr_pick;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_v_q <= 1'b0;
      own_q   <= '0;
      rr_q    <= '0;
    end else if (!own_keeps) begin
      own_v_q <= pick_v;
      own_q   <= pick;
      if (pick_v && !sched_found)
        rr_q <= (int'(pick) == N_PORTS - 1) ? '0 : pick + 1'b1;
    end
  end

  always_comb begin
    grant = '0;
    if (own_v_q) grant[own_q] = 1'b1;
  end

  // broadcast: the owner's flit, one cycle of air latency
  always_comb begin
    n_tx     = '0;
    flit_mux = '0;
    for (int i = 0; i < N_PORTS; i++) begin
      if (tx_valid[i]) begin
        n_tx     = n_tx + 1'b1;
        flit_mux = tx_flit[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_valid       <= 1'b0;
      rx_flit        <= '0;
      collision      <= 1'b0;
      sched_conflict <= 1'b0;
    end else begin
      rx_valid <= (n_tx != '0);
      rx_flit  <= flit_mux;
      if (n_tx > 1 || (tx_valid & ~grant) != '0) collision <= 1'b1;
      if (n_sched > 1) sched_conflict <= 1'b1;
    end
  end

  // A collision-free MAC never lets two interfaces talk at once.
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_valid & ~grant) == '0);

endmodule
