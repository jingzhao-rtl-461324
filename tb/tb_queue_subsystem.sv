// tb_queue_subsystem: posts WQEs into rings in a host-memory model, rings doorbells and
// checks the sub-WQE stream of queue_subsystem (small configuration: 8 queues, 4 cache
// cells of 4 WQEs). Checks:
//  * every sub-WQE carries the fields of its WQE, remote address advanced per SGE, and
//    each queue's WQEs come out in order;
//  * two busy queues take turns one WQE at a time;
//  * ring wrap-around, cache hits, cache misses and a cell taken over by another queue;
//  * the rate limiter holds a queue back once its window is used up and lets it go on
//    after the window is set again.
`timescale 1ns/1ps
module tb_queue_subsystem;
  import jz_pkg::*;
  localparam int NQ = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic db_valid, db_ready, qcfg_valid, rl_cfg_valid, sub_valid, sub_ready;
  logic [15:0] db_qpn, db_tail, qcfg_qpn, rl_cfg_qpn;
  logic [63:0] qcfg_base;
  logic [4:0] qcfg_size_log;
  logic [31:0] rl_cfg_window;
  sub_wqe_t sub_wqe;
  logic dma_rd_valid, dma_rd_ready, dma_rsp_valid, dma_rsp_ready;
  logic [63:0] dma_rd_addr;
  logic [15:0] dma_rd_len;
  beat_t dma_rsp_beat;
  logic [31:0] stat_wqes, stat_throttled, stat_cache_hits, stat_cache_misses;

  queue_subsystem #(.NQ(NQ), .SLOTS(64), .CELL_SLOTS(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host memory: WQE rings ----------------
  logic [511:0] hmem [longint];
  function automatic longint ring_base(int q); return 64'h10000 * (q + 1); endfunction
  localparam int RING_LOG = 3;
  int tail [NQ];
  // expected sub-WQEs per queue
  sub_wqe_t exp_q [NQ][$];

  task automatic post(input int q, input int nsge, input int len);
    logic [511:0] w;
    longint raddr;
    w = '0;
    w[7:0] = 8'(OP_RDMA_WRITE); w[15:8] = 8'(nsge); w[63:32] = $urandom;
    raddr = {$urandom, $urandom}; w[127:64] = raddr;
    for (int i = 0; i < nsge; i++) begin
      sub_wqe_t s;
      w[128*(i+1) +: 64] = {$urandom, $urandom};
      w[128*(i+1) + 64 +: 32] = $urandom;
      w[128*(i+1) + 96 +: 32] = 32'(len);
      s.qpn = 16'(q); s.opcode = OP_RDMA_WRITE; s.last_sge = (i == nsge - 1);
      s.lkey = w[128*(i+1) + 64 +: 32]; s.laddr = w[128*(i+1) +: 64]; s.len = 32'(len);
      s.rkey = w[63:32]; s.raddr = raddr; raddr += len;
      exp_q[q].push_back(s);
    end
    hmem[ring_base(q) + 64 * (tail[q] % (1 << RING_LOG))] = w;
    tail[q]++;
  endtask
  task automatic ring(input int q);
    db_valid = 1; db_qpn = 16'(q); db_tail = 16'(tail[q]);
    do begin @(negedge clk); #2; end while (!db_ready);
    @(posedge clk); #1;
    db_valid = 0;
  endtask

  // DMA model: one read at a time, data after a random delay. Inputs change at the
  // falling edge; the transfer seen #1 later is the one the next rising edge makes.
  longint rd_addr; int rd_beats = 0, rd_k = 0, rd_wait = 0;
  always @(negedge clk) begin
    dma_rsp_valid = 0;
    dma_rd_ready = (rd_beats == 0);
    if (rd_beats != 0) begin
      if (rd_wait != 0) rd_wait--;
      else begin
        dma_rsp_valid = 1;
        dma_rsp_beat.data = hmem.exists(rd_addr + 64 * rd_k) ? hmem[rd_addr + 64 * rd_k] : '0;
        dma_rsp_beat.nbytes = 64; dma_rsp_beat.last = (rd_k == rd_beats - 1);
      end
    end
    #1;
    if (rst_n && dma_rd_valid && dma_rd_ready) begin
      rd_addr = longint'(dma_rd_addr); rd_beats = int'(dma_rd_len) / 64; rd_k = 0; rd_wait = 3 + $urandom % 10;
      check(dma_rd_len % 64 == 0 && dma_rd_len != 0 && dma_rd_len <= 4 * 64, "refill length");
    end else if (dma_rsp_valid && dma_rsp_ready) begin
      rd_k++;
      if (rd_k == rd_beats) rd_beats = 0;
    end
  end

  // sub-WQE checker
  int got = 0;
  int order[$];
  always @(negedge clk) begin
    sub_ready = ($urandom % 4) != 0;
    #1;
    if (rst_n && sub_valid && sub_ready) begin
      int q;
      q = int'(sub_wqe.qpn);
      check(q < NQ && exp_q[q].size() != 0, "sub-WQE for a queue with posted work");
      if (q < NQ && exp_q[q].size() != 0) begin
        check(sub_wqe == exp_q[q][0], $sformatf("sub-WQE fields of queue %0d", q));
        void'(exp_q[q].pop_front());
      end
      if (sub_wqe.last_sge) order.push_back(q);
      got++;
    end
  end

  function automatic int pending();
    int n = 0;
    for (int q = 0; q < NQ; q++) n += exp_q[q].size();
    return n;
  endfunction
  task automatic wait_idle();
    int guard = 0;
    while (pending() != 0 && guard < 5000) begin @(posedge clk); guard++; end
    repeat (20) @(posedge clk); #1;
  endtask

  initial begin
    int m0, t0;
    db_valid = 0; db_qpn = 0; db_tail = 0; qcfg_valid = 0; qcfg_qpn = 0; qcfg_base = 0;
    qcfg_size_log = 0; rl_cfg_valid = 0; rl_cfg_qpn = 0; rl_cfg_window = 0;
    dma_rsp_beat = '0;
    foreach (tail[q]) tail[q] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (NQ + 3) @(posedge clk); #1;
    for (int q = 0; q < NQ; q++) begin
      qcfg_valid = 1; qcfg_qpn = 16'(q); qcfg_base = ring_base(q); qcfg_size_log = 5'(RING_LOG);
      @(posedge clk); #1;
    end
    qcfg_valid = 0;

    // 1. two queues with 4 WQEs each: they take turns
    for (int i = 0; i < 4; i++) begin post(2, 1, 100); post(3, 2, 50); end
    ring(2); ring(3);
    wait_idle();
    check(pending() == 0, "all WQEs of queues 2 and 3 delivered");
    check(order.size() == 8, "8 WQEs");
    for (int i = 1; i < order.size(); i++) check(order[i] != order[i-1], "queues alternate");

    // 2. random traffic on all queues with wrap-around; queues 1 and 5 share a cell
    for (int round = 0; round < 30; round++) begin
      int q, n;
      q = $urandom % NQ;
      n = 1 + $urandom % 5;
      if (tail[q] - int'(dut.q_head[q]) + n > (1 << RING_LOG)) continue;
      for (int i = 0; i < n; i++) post(q, 1 + $urandom % 3, 1 + $urandom % 2000);
      ring(q);
      repeat ($urandom % 30) @(posedge clk);
      #1;
    end
    wait_idle();
    check(pending() == 0, "all random WQEs delivered");
    check(stat_cache_hits > 0 && stat_cache_misses > 0, "cache hits and misses both happened");
    m0 = int'(stat_cache_misses);
    post(1, 1, 8); ring(1); wait_idle();
    post(5, 1, 8); ring(5); wait_idle();
    post(1, 1, 8); ring(1); wait_idle();
    check(int'(stat_cache_misses) == m0 + 3, "queues 1 and 5 take the shared cell from each other");

    // 3. rate limiter: window 1000 bytes, WQEs of 300 bytes: 3 go, the rest wait
    rl_cfg_valid = 1; rl_cfg_qpn = 6; rl_cfg_window = 1000; @(posedge clk); #1; rl_cfg_valid = 0;
    t0 = int'(stat_wqes);
    for (int i = 0; i < 5; i++) post(6, 1, 300);
    ring(6);
    repeat (400) @(posedge clk); #1;
    check(int'(stat_wqes) == t0 + 3, $sformatf("3 WQEs within the window, got %0d", int'(stat_wqes) - t0));
    check(stat_throttled > 0, "queue throttled by the rate limiter");
    check(exp_q[6].size() == 2, "two WQEs wait");
    rl_cfg_valid = 1; rl_cfg_qpn = 6; rl_cfg_window = 100000; @(posedge clk); #1; rl_cfg_valid = 0;
    wait_idle();
    check(exp_q[6].size() == 0, "window reopened: the rest is sent");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
