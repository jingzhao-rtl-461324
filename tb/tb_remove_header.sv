// tb_remove_header: sends random packets (8-byte header + 1..300 payload bytes) through
// remove_header under random back-pressure; checks the realigned payload bytes, the beat
// structure and that out_hdr shows the header on every beat. A second phase without
// stalls checks the beat and clock counts.
`timescale 1ns/1ps
module tb_remove_header;
  import jz_pkg::*;
  localparam int H = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  beat_t in_beat, out_beat;
  logic [8*H-1:0] in_hdr, out_hdr;
  logic [8*H-1:0] hdr_q[$];
  int checks = 0, failures = 0;
  byte unsigned exp_q[$];       // expected output bytes
  int exp_len[$];               // expected packet lengths
  int npkts = 400, got_pkts = 0;
  bit stall_out = 1;
  int out_beats = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  remove_header #(.HDR_BYTES(H)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender
  task automatic send_pkt(input int plen, input bit stall);
    int len = plen;
    byte unsigned p[];
    p = new[len + H];
    foreach (p[i]) p[i] = 8'($urandom);
    for (int i = 0; i < H; i++) in_hdr[8*i +: 8] = p[i];
    hdr_q.push_back(in_hdr);
    for (int i = H; i < len + H; i++) exp_q.push_back(p[i]);
    exp_len.push_back(len);
    len = len + H;
    for (int off = 0; off < len; off += BEAT_B) begin
      int n = (len - off > BEAT_B) ? BEAT_B : len - off;
      while (stall && ($urandom % 4 == 0)) begin in_valid = 0; @(posedge clk); #1; end
      in_valid = 1;
      in_beat.data = '0;
      for (int i = 0; i < n; i++) in_beat.data[8*i +: 8] = p[off + i];
      in_beat.nbytes = NBYTES_W'(n);
      in_beat.last = (off + n == len);
      // in_ready is final two time units after the falling edge
      do begin @(negedge clk); #2; end while (!in_ready);
      @(posedge clk); #1;
    end
    in_valid = 0;
  endtask

  // receiver
  int cur_len = 0;
  // Decide out_ready at the falling edge and record the transfer the next rising edge makes.
  always @(negedge clk) begin
   out_ready = stall_out ? ($urandom % 3 != 0) : 1'b1;
   #1;
   if (rst_n && out_valid && out_ready) begin
    out_beats++;
    check(out_beat.last || out_beat.nbytes == BEAT_B, "non-last beats are full");
    check(hdr_q.size() != 0 && out_hdr == hdr_q[0], "out_hdr");
    if (out_beat.last && hdr_q.size() != 0) void'(hdr_q.pop_front());
    for (int i = 0; i < out_beat.nbytes; i++) begin
      check(exp_q.size() != 0 && out_beat.data[8*i +: 8] == exp_q[0], $sformatf("output byte %0d got %h exp %h n=%0d last=%0d", i, out_beat.data[8*i +: 8], exp_q[0], out_beat.nbytes, out_beat.last));
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    cur_len += out_beat.nbytes;
    if (out_beat.last) begin
      check(exp_len.size() != 0 && cur_len == exp_len[0], $sformatf("packet length %0d", cur_len));
      if (exp_len.size() != 0) void'(exp_len.pop_front());
      cur_len = 0;
      got_pkts++;
    end
   end
  end

  initial begin
    int t0, nb, c0;
    in_valid = 0; in_beat = '0; in_hdr = '0;
    stall_out = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int k = 0; k < npkts; k++) send_pkt(1 + $urandom % 300, 1);
    while (got_pkts < npkts) @(posedge clk);
    // rate: back-to-back payloads of 56, 57, 64, 200 bytes, no stalls
    stall_out = 0; @(posedge clk); #1;
    t0 = out_beats; nb = 0; c0 = cycles;
    send_pkt(56, 0);  nb += 1;   // 64 bytes in: 1 beat in, 1 out, 1 clock
    send_pkt(57, 0);  nb += 1;   // 65 bytes in: 2 beats in, 1 out, 2 clocks
    send_pkt(64, 0);  nb += 1;   // 72 bytes in: 2 in, 1 out, 2 clocks
    send_pkt(200, 0); nb += 4;   // 208 bytes in: 4 in, 4 out (the last after the input)
    // 9 input beats taken in 9 clocks: no input bubble
    check(cycles - c0 == 9, $sformatf("clocks for 4 packets: %0d", cycles - c0));
    repeat (4) @(posedge clk);
    check(out_beats - t0 == nb, $sformatf("beat count %0d, expected %0d", out_beats - t0, nb));
    check(exp_q.size() == 0, "all bytes delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
