// wireless_interface: digital side of a node's wireless interface (WI).
//
// Transmit: the node hands over one packet (tx_valid/tx_ready). The WI
// latches it, works out from the 3-bit type how many FLIT_W-bit flits it
// occupies, raises ch_req towards the shared channel (with ch_sched telling
// whether this access is scheduled by the ID-MAC token or by the dispatch
// phase) and, in every cycle ch_grant is high, puts the next flit on
// ch_tx_flit, most significant bits first. After the last flit it drops
// ch_req so the channel can hand the medium to someone else.
//
// Receive: the channel broadcasts every flit to every WI (including the
// sender). A flit that arrives while no packet is being assembled is a
// header: its top three bits give the packet type and hence the flit count.
// When the last flit is in, rx_valid pulses for one cycle with the packet,
// left-aligned in rx_pkt as defined in idmac_pkg.
//
// Timing: tx_ready is high only while the WI is idle. A packet accepted in
// cycle t requests the medium in t+1; with the channel free the grant comes
// in t+2 and an n-flit packet occupies the medium for n cycles. A 10-bit
// token packet therefore takes one cycle on air (1 ns at 1 GHz, 12 Gb/s).
// The flit framing and the request/grant interface are this design's own;
// the source description gives the bitrate, the token time and the packet
// layouts.
module wireless_interface
  import idmac_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // node side, transmit
  input  logic              tx_valid,
  input  pkt_t              tx_pkt,
  input  logic              tx_sched,
  output logic              tx_ready,
  // node side, receive
  output logic              rx_valid,
  output pkt_t              rx_pkt,
  // channel side
  output logic              ch_req,
  output logic              ch_sched,
  input  logic              ch_grant,
  output logic              ch_tx_valid,
  output logic [FLIT_W-1:0] ch_tx_flit,
  input  logic              ch_rx_valid,
  input  logic [FLIT_W-1:0] ch_rx_flit
);
  localparam int SH_W = MAX_FLITS * FLIT_W;

  // ------------------------------------------------------------- transmit
  logic               tx_busy_q;
  logic [SH_W-1:0]    tx_shift_q;
  logic [FLITS_W-1:0] tx_left_q;
  logic               tx_sched_q;

  assign tx_ready    = !tx_busy_q;
  assign ch_req      = tx_busy_q;
  assign ch_sched    = tx_sched_q;
  assign ch_tx_valid = tx_busy_q && ch_grant;
  assign ch_tx_flit  = tx_shift_q[SH_W-1 -: FLIT_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy_q  <= 1'b0;
      tx_shift_q <= '0;
      tx_left_q  <= '0;
      tx_sched_q <= 1'b0;
    end else if (!tx_busy_q) begin
      if (tx_valid) begin
        tx_busy_q  <= 1'b1;
        tx_shift_q <= {tx_pkt, {(SH_W - PKT_W){1'b0}}};
        tx_left_q  <= pkt_flits(tx_pkt[PKT_W-1 -: TYPE_W]);
        tx_sched_q <= tx_sched;
      end
    end else if (ch_grant) begin
      tx_shift_q <= tx_shift_q << FLIT_W;
      tx_left_q  <= tx_left_q - 1'b1;
      if (tx_left_q == FLITS_W'(1)) tx_busy_q <= 1'b0;
    end
  end

  // -------------------------------------------------------------- receive
  logic [SH_W-1:0]    rx_shift_q;
  logic [FLITS_W-1:0] rx_left_q;
  logic [FLITS_W-1:0] rx_total_q;
  logic [FLITS_W-1:0] hdr_flits;

  assign hdr_flits = pkt_flits(ch_rx_flit[FLIT_W-1 -: TYPE_W]);

  // Left-align the assembled flits into a packet word.
  function automatic pkt_t align(logic [SH_W-1:0] sh, logic [FLITS_W-1:0] n);
    logic [SH_W-1:0] a;
    a = sh << (FLIT_W * (MAX_FLITS - int'(n)));
    return a[SH_W-1 -: PKT_W];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_shift_q <= '0;
      rx_left_q  <= '0;
      rx_total_q <= '0;
      rx_valid   <= 1'b0;
      rx_pkt     <= '0;
    end else begin
      rx_valid <= 1'b0;
      if (ch_rx_valid) begin
        if (rx_left_q == '0) begin
          // header flit
          rx_shift_q <= {{(SH_W - FLIT_W){1'b0}}, ch_rx_flit};
          rx_total_q <= hdr_flits;
          if (hdr_flits <= FLITS_W'(1)) begin
            rx_valid  <= 1'b1;
            rx_pkt    <= align({{(SH_W - FLIT_W){1'b0}}, ch_rx_flit}, FLITS_W'(1));
            rx_left_q <= '0;
          end else begin
            rx_left_q <= hdr_flits - 1'b1;
          end
        end else begin
          rx_shift_q <= {rx_shift_q[SH_W-FLIT_W-1:0], ch_rx_flit};
          rx_left_q  <= rx_left_q - 1'b1;
          if (rx_left_q == FLITS_W'(1)) begin
            rx_valid <= 1'b1;
            rx_pkt   <= align({rx_shift_q[SH_W-FLIT_W-1:0], ch_rx_flit}, rx_total_q);
          end
        end
      end
    end
  end

endmodule
