// tb_transport_subsystem: two pairs of transport subsystems talk over lossy links, one
// pair in Selective Repeat mode, one in Go-Back-N mode. Every node sends random packets
// (1..9 beats, random byte counts) to its peer; the links drop packets at random, of
// data and control alike, and delay the rest. Checks:
//  * each receiver delivers exactly the sent packet sequence, in order, once;
//  * the mechanisms all occur: retransmissions, timeouts, NAKs, ACKs, duplicates, and
//    (SR) packets stored out of order.
`timescale 1ns/1ps
module tb_transport_subsystem;
  import jz_pkg::*;
  localparam int NPKT = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // node n = 0..3; node n sends to node n^1; nodes 0,1 SR, nodes 2,3 GBN
  logic    in_v [4], in_r [4], tx_v [4], tx_r [4], rx_v [4], rx_r [4], out_v [4], out_r [4];
  beat_t   in_b [4], tx_b [4], rx_b [4], out_b [4];
  ts_hdr_t tx_h [4], rx_h [4];
  logic [31:0] s_new [4], s_retx [4], s_to [4], s_ack [4], s_nak [4], s_ooo [4], s_drop [4], s_dup [4];

  for (genvar n = 0; n < 4; n++) begin : g_node
    transport_subsystem #(.GBN(n >= 2), .TIMEOUT(600)) dut (
      .clk, .rst_n,
      .tx_in_valid(in_v[n]), .tx_in_ready(in_r[n]), .tx_in_beat(in_b[n]),
      .link_tx_valid(tx_v[n]), .link_tx_ready(tx_r[n]), .link_tx_beat(tx_b[n]), .link_tx_hdr(tx_h[n]),
      .link_rx_valid(rx_v[n]), .link_rx_ready(rx_r[n]), .link_rx_beat(rx_b[n]), .link_rx_hdr(rx_h[n]),
      .rx_out_valid(out_v[n]), .rx_out_ready(out_r[n]), .rx_out_beat(out_b[n]),
      .stat_tx_new(s_new[n]), .stat_retx(s_retx[n]), .stat_timeouts(s_to[n]),
      .stat_ack_rx(s_ack[n]), .stat_nak_rx(s_nak[n]), .stat_ooo(s_ooo[n]),
      .stat_drop(s_drop[n]), .stat_dup(s_dup[n]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected beats per receiving node
  beat_t exp_b [4][$];
  int sent_done [4], got_pkts [4];

  // sources
  for (genvar n = 0; n < 4; n++) begin : g_src
    initial begin
      int nb, last_n;
      beat_t b;
      in_v[n] = 0; in_b[n] = '0;
      sent_done[n] = 0;
      wait (rst_n);
      repeat (40) @(posedge clk); #1;
      for (int p = 0; p < NPKT; p++) begin
        nb = 1 + $urandom % 9;
        last_n = 1 + $urandom % 64;
        for (int k = 0; k < nb; k++) begin
          for (int w = 0; w < 16; w++) b.data[32*w +: 32] = $urandom;
          b.last = (k == nb - 1);
          b.nbytes = b.last ? 7'(last_n) : 7'd64;
          if (b.last && last_n == 64) b.nbytes = 7'd64;
          exp_b[n ^ 1].push_back(b);
          in_v[n] = 1; in_b[n] = b;
          do begin @(negedge clk); #2; end while (!in_r[n]);
          @(posedge clk); #1;
        end
        in_v[n] = 0;
        repeat ($urandom % 20) @(posedge clk);
        #1;
      end
      sent_done[n] = 1;
    end
  end

  // lossy links: node n's transmitter feeds node n^1's receiver
  typedef struct { beat_t b; ts_hdr_t h; longint t; } lb_t;
  lb_t q [4][$];
  bit  dropping [4];
  for (genvar n = 0; n < 4; n++) begin : g_link
    always @(negedge clk) begin
      lb_t e;
      tx_r[n] = ($urandom % 8) != 0;
      // deliver to node n^1
      rx_v[n ^ 1] = 0;
      if (q[n].size() != 0 && q[n][0].t <= $time) begin
        rx_v[n ^ 1] = 1; rx_b[n ^ 1] = q[n][0].b; rx_h[n ^ 1] = q[n][0].h;
      end
      #1;
      if (rst_n && tx_v[n] && tx_r[n]) begin
        if (!g_link[n].in_pkt) dropping[n] = ($urandom % 100) < 8;
        g_link[n].in_pkt = !tx_b[n].last;
        if (!dropping[n]) begin
          e.b = tx_b[n]; e.h = tx_h[n]; e.t = $time + 200;
          q[n].push_back(e);
        end
      end
      if (rx_v[n ^ 1] && rx_r[n ^ 1]) void'(q[n].pop_front());
    end
    bit in_pkt = 0;
  end

  // sinks
  for (genvar n = 0; n < 4; n++) begin : g_sink
    always @(negedge clk) begin
      out_r[n] = ($urandom % 4) != 0;
      #1;
      if (rst_n && out_v[n] && out_r[n]) begin
        check(exp_b[n].size() != 0, "beat received that was not sent");
        if (exp_b[n].size() != 0) begin
          check(out_b[n] == exp_b[n][0], $sformatf("node %0d beat contents", n));
          void'(exp_b[n].pop_front());
        end
        if (out_b[n].last) got_pkts[n]++;
      end
    end
  end

  initial begin
    int guard;
    foreach (got_pkts[n]) got_pkts[n] = 0;
    foreach (dropping[n]) dropping[n] = 0;
    repeat (5) @(posedge clk); rst_n = 1;
    guard = 0;
    while (guard < 300000 && (got_pkts[0] + got_pkts[1] + got_pkts[2] + got_pkts[3]) != 4 * NPKT) begin
      @(posedge clk); guard++;
    end
    repeat (2000) @(posedge clk);
    for (int n = 0; n < 4; n++) begin
      check(got_pkts[n] == NPKT, $sformatf("node %0d received %0d of %0d packets", n, got_pkts[n], NPKT));
      check(exp_b[n].size() == 0, "all beats delivered");
      check(s_retx[n] > 0, $sformatf("node %0d retransmitted", n));
      check(s_to[n] > 0, $sformatf("node %0d timer fired", n));
      check(s_nak[n] > 0, $sformatf("node %0d received a NAK", n));
      check(s_ack[n] > 0, $sformatf("node %0d received an ACK", n));
      check(s_dup[n] + s_drop[n] > 0, $sformatf("node %0d dropped a packet", n));
      $display("node %0d: new=%0d retx=%0d timeouts=%0d acks=%0d naks=%0d ooo=%0d drop=%0d dup=%0d",
               n, s_new[n], s_retx[n], s_to[n], s_ack[n], s_nak[n], s_ooo[n], s_drop[n], s_dup[n]);
    end
    check(s_ooo[0] > 0 && s_ooo[1] > 0, "SR stored packets out of order");
    check(s_ooo[2] == 0 && s_ooo[3] == 0, "GBN stores nothing out of order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
