// tb_wireless_interface: self-checking test of the WI serialiser/deserialiser.
// The WI's transmit side is looped back to its receive side through a
// one-cycle "air" register; the grant is given after a random delay. Random
// packets of every type are sent; each must come back unchanged and occupy
// the medium for exactly its flit count (token and EOC packets: 1 cycle,
// CBP/LIP/TPDIP: 2, TPSIP: 3). Packet words are built in the testbench by
// plain concatenation of the published field layout.
`timescale 1ns/1ps
module tb_wireless_interface;
  import idmac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic tx_valid = 0, tx_sched = 0, tx_ready;
  pkt_t tx_pkt = '0, rx_pkt;
  logic rx_valid;
  logic ch_req, ch_sched, ch_grant = 0, ch_tx_valid;
  logic [FLIT_W-1:0] ch_tx_flit;
  logic ch_rx_valid = 0;
  logic [FLIT_W-1:0] ch_rx_flit = '0;
  int checks = 0, failures = 0;
  int air_cycles = 0;
  pkt_t got[$];

  wireless_interface dut (.*);
  always #5 clk = ~clk;

  // loopback air + grant model
  int gdelay = 0;
  always @(posedge clk) if (rst_n) begin
    ch_rx_valid <= ch_tx_valid;
    ch_rx_flit  <= ch_tx_flit;
    if (ch_tx_valid) air_cycles++;
    if (ch_req && !ch_grant) begin
      if (gdelay == 0) ch_grant <= 1; else gdelay--;
    end else if (!ch_req) begin
      ch_grant <= 0; gdelay = $urandom_range(0, 3);
    end
    if (rx_valid) got.push_back(rx_pkt);
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic pkt_t left(logic [PKT_W-1:0] v, int bits);
    return v << (PKT_W - bits);
  endfunction

  initial begin
    #500000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic int t = $urandom_range(0, 5);
      automatic pkt_t p;
      automatic int bits, flits;
      case (t)
        0: begin bits = 3 + 19;      p = left({3'd0, 19'($urandom)}, bits); end
        1: begin bits = 3 + 15;      p = left({3'd1, 15'($urandom)}, bits); end
        2: begin bits = 3 + 26 + 7;  p = left({3'd2, 26'($urandom), 7'($urandom)}, bits); end
        3: begin bits = 3 + 11 + 2;  p = left({3'd3, 11'($urandom), 2'($urandom)}, bits); end
        4: begin bits = 3 + 7;       p = left({3'd4, 7'($urandom)}, bits); end
        default: begin bits = 3 + 7; p = left({3'd5, 7'($urandom)}, bits); end
      endcase
      flits = (bits + 11) / 12;
      @(negedge clk);
      while (!tx_ready) @(negedge clk);
      tx_valid = 1; tx_pkt = p; tx_sched = n[0];
      air_cycles = 0;
      @(negedge clk); tx_valid = 0;
      check(ch_req && ch_sched == n[0], "request raised with sched class");
      // wait for it to come back
      for (int w = 0; w < 40 && got.size() == 0; w++) @(negedge clk);
      check(got.size() == 1, "one packet received");
      if (got.size() > 0) begin
        check(got[0] == p, $sformatf("packet type %0d intact %h vs %h", t, got[0], p));
        void'(got.pop_front());
      end
      check(air_cycles == flits, $sformatf("type %0d uses %0d flits (saw %0d)", t, flits, air_cycles));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
