// tb_gather_data: random buffers at any byte alignment and length are gathered through
// gather_data from a host-memory model whose bytes are a function of their address.
// Checks the aligned DMA read each command makes, every output byte, the byte count and
// last flag of each beat, zero bytes past the end, and the number of output beats.
`timescale 1ns/1ps
module tb_gather_data;
  import jz_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, dma_rd_valid, dma_rd_ready, dma_rsp_valid, dma_rsp_ready;
  logic out_valid, out_ready;
  logic [63:0] cmd_addr, dma_rd_addr;
  logic [15:0] cmd_len, dma_rd_len;
  beat_t dma_rsp_beat, out_beat;

  gather_data dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic [7:0] mb(input longint a);
    return 8'(a * 13 ^ (a >> 7));
  endfunction

  // DMA model: one read at a time
  longint ra; int rbeats = 0, rk = 0;
  always @(negedge clk) begin
    dma_rd_ready = (rbeats == 0) && ($urandom % 3 != 0);
    dma_rsp_valid = (rbeats != 0) && ($urandom % 3 != 0);
    for (int b = 0; b < 64; b++) dma_rsp_beat.data[8*b +: 8] = mb(ra + 64 * rk + b);
    dma_rsp_beat.nbytes = 64; dma_rsp_beat.last = (rk == rbeats - 1);
    #1;
    if (rst_n && dma_rd_valid && dma_rd_ready) begin
      ra = longint'(dma_rd_addr); rbeats = int'(dma_rd_len) / 64; rk = 0;
      check(dma_rd_addr % 64 == 0 && dma_rd_len % 64 == 0, "aligned DMA read");
      check(longint'(dma_rd_addr) == (cur_a & ~64'd63) &&
            int'(dma_rd_len) == ((cur_a % 64 + cur_l + 63) / 64) * 64, "read covers the buffer");
    end else if (dma_rsp_valid && dma_rsp_ready) begin
      rk++;
      if (rk == rbeats) rbeats = 0;
    end
  end

  // output checker
  longint cur_a; int cur_l, got = 0, nbeats = 0, done_cmds = 0;
  always @(negedge clk) begin
    out_ready = ($urandom % 4) != 0;
    #1;
    if (rst_n && out_valid && out_ready) begin
      int n;
      n = int'(out_beat.nbytes);
      check(out_beat.last == (got + n == cur_l), "last flag");
      check(n == (out_beat.last ? cur_l - got : 64), "byte count");
      for (int b = 0; b < 64; b++)
        if (b < n) check(out_beat.data[8*b +: 8] == mb(cur_a + got + b), "data byte");
        else check(out_beat.data[8*b +: 8] == 8'h00, "zero past the end");
      got += n; nbeats++;
      if (out_beat.last) begin
        check(nbeats == (cur_l + 63) / 64, "number of output beats");
        done_cmds++;
      end
    end
  end

  initial begin
    cmd_valid = 0; cmd_addr = 0; cmd_len = 0; dma_rsp_beat = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 400; c++) begin
      cur_a = {$urandom, $urandom} & 64'h0000_FFFF_FFFF_FFFF;
      cur_l = (c % 4 == 0) ? 1 + $urandom % 70 : 1 + $urandom % 2000;
      got = 0; nbeats = 0;
      @(posedge clk); #1;
      cmd_valid = 1; cmd_addr = cur_a; cmd_len = 16'(cur_l);
      do begin @(negedge clk); #2; end while (!cmd_ready);
      @(posedge clk); #1;
      cmd_valid = 0;
      while (done_cmds != c + 1) @(posedge clk);
    end
    check(done_cmds == 400, "all commands finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
