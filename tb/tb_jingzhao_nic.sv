// tb_jingzhao_nic: end-to-end test of the full-size NIC (no parameter changed).
//
// The NIC's link is looped back to itself through a model that drops and delays packets,
// so every RDMA WRITE travels host memory -> queue subsystem -> request core -> transport
// -> lossy link -> transport -> receive core -> host memory of the same NIC. The host
// memory model holds WQE rings, the QPC, MPT and MTT tables and the data; it answers DMA
// reads after a PCIe-like delay with completions of different tags interleaved, and
// accepts writes with random back-pressure.
// Checks:
//  * every destination byte equals the source byte reached through MPT and MTT;
//  * received byte and packet counts, and the PSN each QP context ends with in host
//    memory (written back through the QPC cache);
//  * each mechanism happened at least once: queue-cache hit and miss, QPC/MPT/MTT cache
//    hit and miss, rate-limiter throttling, DMA completions out of order, bus write
//    back-pressure, link loss, retransmission, timeout, NAK, out-of-order storage,
//    duplicate or dropped packet at the receiver.
// Alongside, the key-value core's packet ports are looped back with random stalls, so it
// serves its own requests: SETs of eight fixed keys, GETs of them (hits, with the value
// set), GETs of keys never set (misses) and a SET that overwrites a value.
`timescale 1ns/1ps
module tb_jingzhao_nic;
  import jz_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;   // 200 MHz

  logic db_valid, db_ready, qcfg_valid, rl_cfg_valid;
  logic [15:0] db_qpn, db_tail, qcfg_qpn, rl_cfg_qpn;
  logic [63:0] qcfg_base, icm_qpc_base, icm_mpt_base, icm_mtt_base;
  logic [4:0] qcfg_size_log;
  logic [31:0] rl_cfg_window;
  logic bus_rd_valid, bus_rd_ready, bus_cpl_valid, bus_wr_valid, bus_wr_ready;
  logic [63:0] bus_rd_addr, bus_wr_addr;
  logic [15:0] bus_rd_len;
  logic [5:0] bus_rd_tag, bus_cpl_tag;
  logic [511:0] bus_cpl_data;
  beat_t bus_wr_beat;
  logic link_tx_valid, link_tx_ready, link_rx_valid, link_rx_ready;
  beat_t link_tx_beat, link_rx_beat;
  ts_hdr_t link_tx_hdr, link_rx_hdr;
  nic_stats_t stats;
  logic kv_req_valid, kv_req_ready, kv_req_set, kv_res_valid, kv_res_ready;
  logic [5:0] kv_req_key_len, kv_res_key_len;
  logic [191:0] kv_req_key, kv_res_key;
  logic [255:0] kv_req_value, kv_res_value;
  logic [47:0] kv_req_dst_mac;
  logic [7:0] kv_res_op;
  logic kv_tx_valid, kv_tx_ready, kv_rx_valid, kv_rx_ready, kv_go;
  beat_t kv_tx_beat, kv_rx_beat;
  logic [5:0][31:0] kv_stats;

  jingzhao_nic dut (.*);

  // key-value loopback with random stalls
  assign kv_rx_valid = kv_tx_valid && kv_go;
  assign kv_rx_beat  = kv_tx_beat;
  assign kv_tx_ready = kv_rx_ready && kv_go;
  always @(negedge clk) kv_go = ($urandom % 4) != 0;

  // key-value client: requests in order, answers expected in the same order
  typedef struct { logic [7:0] op; logic [255:0] value; int key; } kv_exp_t;
  kv_exp_t kv_q [$];
  int kv_answers = 0, kv_sent = 0;
  bit kv_done = 0;
  function automatic logic [191:0] kv_key(input int k);
    string str = $sformatf("kv-key-%0d", k);
    logic [191:0] key = '0;
    for (int b = 0; b < str.len(); b++) key[8*b +: 8] = str[b];
    return key;
  endfunction
  function automatic int kv_len(input int k);
    string str = $sformatf("kv-key-%0d", k);
    return str.len();
  endfunction
  task automatic kv_issue(input bit set, input int k, input logic [255:0] v, input logic [7:0] exp_op,
                          input logic [255:0] exp_v);
    kv_exp_t e;
    e.op = exp_op; e.value = exp_v; e.key = k;
    kv_q.push_back(e);
    kv_req_valid = 1; kv_req_set = set; kv_req_key = kv_key(k); kv_req_key_len = 6'(kv_len(k));
    kv_req_value = v; kv_req_dst_mac = 48'h02_00_00_00_00_01;
    do begin @(negedge clk); #2; end while (!kv_req_ready);
    @(posedge clk); #1;
    kv_req_valid = 0;
    kv_sent++;
  endtask
  always @(negedge clk) begin
    kv_exp_t e;
    kv_res_ready = ($urandom % 3) != 0;
    #1;
    if (rst_n && kv_res_valid && kv_res_ready) begin
      if (kv_q.size() == 0) check(0, "key-value: unexpected answer");
      else begin
        e = kv_q.pop_front();
        check(kv_res_op == e.op && kv_res_value == e.value && kv_res_key == kv_key(e.key) &&
              int'(kv_res_key_len) == kv_len(e.key),
              $sformatf("key-value answer %0d: op %h expected %h for key %0d", kv_answers, kv_res_op, e.op, e.key));
      end
      kv_answers++;
    end
  end
  initial begin
    logic [255:0] val [8];
    kv_req_valid = 0; kv_req_set = 0; kv_req_key = '0; kv_req_key_len = '0; kv_req_value = '0;
    kv_req_dst_mac = '0;
    wait (rst_n);
    @(posedge clk); #1;
    for (int k = 0; k < 8; k++) begin
      val[k] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      kv_issue(1, k, val[k], 8'h83, val[k]);
    end
    for (int r = 0; r < 2; r++)
      for (int k = 0; k < 8; k++) begin
        kv_issue(0, k, '0, 8'h81, val[k]);
        kv_issue(0, 100 + k, '0, 8'h82, '0);
      end
    val[3] = ~val[3];
    kv_issue(1, 3, val[3], 8'h83, val[3]);
    kv_issue(0, 3, '0, 8'h81, val[3]);
    wait (kv_q.size() == 0);
    kv_done = 1;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: rx_bytes=%0d", stats.rx_bytes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host memory ----------------
  localparam longint QPC_BASE = 64'h0010_0000, MPT_BASE = 64'h0020_0000, MTT_BASE = 64'h0030_0000;
  localparam longint PAGE_BASE = 64'h40_0000_0000, RING_BASE = 64'h20_0000_0000;
  localparam longint DST_BASE = 64'h80_0000_0000;
  localparam int RING_LOG = 4;
  logic [7:0] mem [longint];
  function automatic logic [7:0] pat(input longint a);
    return 8'(a ^ (a >> 8) ^ ((a >> 17) * 3));
  endfunction
  function automatic logic [7:0] rd8(input longint a);
    return mem.exists(a) ? mem[a] : pat(a);
  endfunction
  task automatic wr_bytes(input longint a, input logic [511:0] v, input int n);
    for (int i = 0; i < n; i++) mem[a + i] = v[8*i +: 8];
  endtask
  function automatic longint va_base(input int q); return 64'h1000_0000 * (q + 1); endfunction
  function automatic longint mtt_page(input int i); return PAGE_BASE + (longint'((i * 37) % 4096) << 12); endfunction
  function automatic longint phys(input int q, input longint va);
    return mtt_page(q * 64 + int'((va - va_base(q)) >> 12)) + (va & 4095);
  endfunction

  // bus reads: completions after ~350 ns, tags interleaved
  typedef struct { int tag; longint addr; int beats; int sent; longint t; } bread_t;
  bread_t pend[$];
  int cpl_ooo = 0, wr_stalls = 0;
  assign bus_rd_ready = 1'b1;
  always @(negedge clk) begin
    int cand[$];
    bus_cpl_valid = 0;
    bus_wr_ready = ($urandom % 5) != 0;
    if (rst_n) begin
      if (bus_rd_valid) begin
        check(bus_rd_len <= 512 && bus_rd_len != 0 && bus_rd_addr % 64 == 0, "bus read shape");
        pend.push_back('{tag: int'(bus_rd_tag), addr: longint'(bus_rd_addr),
                         beats: (int'(bus_rd_len) + 63) / 64, sent: 0, t: $time + 350 + ($urandom % 100)});
      end
      cand.delete();
      foreach (pend[i]) if (pend[i].t <= $time) cand.push_back(i);
      if (cand.size() != 0 && ($urandom % 4) != 0) begin
        int i;
        i = cand[$urandom % cand.size()];
        if (i != 0) cpl_ooo++;
        bus_cpl_valid = 1;
        bus_cpl_tag = 6'(pend[i].tag);
        for (int b = 0; b < 64; b++) bus_cpl_data[8*b +: 8] = rd8(pend[i].addr + 64 * pend[i].sent + b);
        if (pend[i].sent + 1 == pend[i].beats) pend.delete(i);
        else pend[i].sent = pend[i].sent + 1;
      end
    end
  end
  // bus writes
  longint wr_base; int wr_k = 0;
  always @(negedge clk) begin
    #1;
    if (rst_n && bus_wr_valid && !bus_wr_ready) wr_stalls++;
    if (rst_n && bus_wr_valid && bus_wr_ready) begin
      if (wr_k == 0) wr_base = longint'(bus_wr_addr);
      wr_bytes(wr_base + 64 * wr_k, bus_wr_beat.data, int'(bus_wr_beat.nbytes));
      wr_k++;
      if (bus_wr_beat.last) wr_k = 0;
    end
  end

  // ---------------- lossy loopback link ----------------
  typedef struct { beat_t b; ts_hdr_t h; longint t; } lb_t;
  lb_t lq[$];
  bit in_pkt = 0, dropping = 0;
  int link_drops = 0;
  always @(negedge clk) begin
    lb_t e;
    link_tx_ready = ($urandom % 8) != 0;
    link_rx_valid = 0;
    if (lq.size() != 0 && lq[0].t <= $time) begin
      link_rx_valid = 1; link_rx_beat = lq[0].b; link_rx_hdr = lq[0].h;
    end
    #1;
    if (rst_n && link_tx_valid && link_tx_ready) begin
      if (!in_pkt) begin
        dropping = ($urandom % 100) < 8;
        if (dropping) link_drops++;
      end
      in_pkt = !link_tx_beat.last;
      if (!dropping) begin
        e.b = link_tx_beat; e.h = link_tx_hdr; e.t = $time + 200;
        lq.push_back(e);
      end
    end
    if (link_rx_valid && link_rx_ready) void'(lq.pop_front());
  end

  // ---------------- work ----------------
  int qs[7] = '{0, 1, 2, 3, 67, 200, 255};
  int tail [256], pkts_of [256];
  longint exp_bytes = 0, exp_pkts = 0, dst_next = DST_BASE;
  typedef struct { longint dst; longint src_va; int q; int len; } seg_t;
  seg_t segs[$];

  // packets the request core makes for one element
  function automatic int npkts(input longint va, input int len);
    int n = 0; longint a = va; int left = len;
    while (left > 0) begin
      int c;
      c = 512;
      if (c > left) c = left;
      if (longint'(c) > 4096 - (a & 4095)) c = int'(4096 - (a & 4095));
      a += c; left -= c; n++;
    end
    return n;
  endfunction

  task automatic post(input int q);
    logic [511:0] w;
    longint raddr, va;
    int nsge, len;
    w = '0;
    nsge = 1 + $urandom % 3;
    raddr = dst_next;
    w[7:0] = 8'(OP_RDMA_WRITE); w[15:8] = 8'(nsge); w[63:32] = 32'h1234; w[127:64] = raddr;
    for (int i = 0; i < nsge; i++) begin
      len = (i == nsge - 1) ? 1 + $urandom % 1500 : 64 * (1 + $urandom % 12);
      va = va_base(q) + 64 * ($urandom % 3000);
      w[128*(i+1) +: 64] = va;
      w[128*(i+1) + 64 +: 32] = 32'(q);      // lkey = MPT index = QP number
      w[128*(i+1) + 96 +: 32] = 32'(len);
      segs.push_back('{dst: raddr, src_va: va, q: q, len: len});
      exp_bytes += len;
      exp_pkts += npkts(va, len);
      pkts_of[q] += npkts(va, len);
      raddr += len;
    end
    dst_next = (raddr + 64'h1000) & ~64'hFFF;
    wr_bytes(RING_BASE + 64'h10000 * q + 64 * (tail[q] % (1 << RING_LOG)), w, 64);
    tail[q]++;
  endtask
  task automatic ring(input int q);
    db_valid = 1; db_qpn = 16'(q); db_tail = 16'(tail[q]);
    do begin @(negedge clk); #1; end while (!db_ready);
    @(posedge clk); #1;
    db_valid = 0;
  endtask

  initial begin
    logic [511:0] e;
    int guard;
    db_valid = 0; db_qpn = 0; db_tail = 0; qcfg_valid = 0; qcfg_qpn = 0; qcfg_base = 0;
    qcfg_size_log = 0; rl_cfg_valid = 0; rl_cfg_qpn = 0; rl_cfg_window = 0;
    icm_qpc_base = QPC_BASE; icm_mpt_base = MPT_BASE; icm_mtt_base = MTT_BASE;
    bus_cpl_tag = 0; bus_cpl_data = '0; link_rx_beat = '0; link_rx_hdr = '0;
    for (int q = 0; q < 256; q++) begin tail[q] = 0; pkts_of[q] = 0; end
    // tables in host memory
    foreach (qs[k]) begin
      int q;
      q = qs[k];
      e = '0; e[23:0] = 24'(q + 256); e[47:24] = 24'(q * 16);
      wr_bytes(QPC_BASE + 64 * q, e, 64);
      e = '0; e[63:0] = va_base(q); e[95:64] = 32'(q * 64);
      wr_bytes(MPT_BASE + 32 * q, e, 32);
      for (int i = 0; i < 64; i++) begin
        e = '0; e[63:0] = mtt_page(q * 64 + i);
        wr_bytes(MTT_BASE + 8 * (q * 64 + i), e, 8);
      end
    end
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (300) @(posedge clk); #1;
    foreach (qs[k]) begin
      qcfg_valid = 1; qcfg_qpn = 16'(qs[k]); qcfg_base = RING_BASE + 64'h10000 * qs[k];
      qcfg_size_log = 5'(RING_LOG);
      @(posedge clk); #1;
    end
    qcfg_valid = 0;
    // QP 2 may send 3000 bytes before its window is opened again
    rl_cfg_valid = 1; rl_cfg_qpn = 2; rl_cfg_window = 3000; @(posedge clk); #1; rl_cfg_valid = 0;

    for (int round = 0; round < 24; round++) begin
      int q, n;
      q = qs[$urandom % 7];
      n = 1 + $urandom % 3;
      if (tail[q] - int'(dut.u_qs.q_head[q]) + n > (1 << RING_LOG)) continue;
      for (int i = 0; i < n; i++) post(q);
      ring(q);
      repeat ($urandom % 400) @(posedge clk);
      #1;
    end
    // make sure QP 2 has more work than its window
    for (int i = 0; i < 3; i++) post(2);
    ring(2);
    guard = 0;
    while (guard < 400000 && longint'(stats.rx_bytes) + 4000 < exp_bytes) begin @(posedge clk); guard++; end
    repeat (20000) @(posedge clk); #1;
    check(stats.throttled > 0, "rate limiter throttled QP 2");
    rl_cfg_valid = 1; rl_cfg_qpn = 2; rl_cfg_window = 32'hFFFF_FFFF; @(posedge clk); #1; rl_cfg_valid = 0;
    guard = 0;
    while (guard < 1000000 && longint'(stats.rx_bytes) != exp_bytes) begin @(posedge clk); guard++; end
    repeat (3000) @(posedge clk); #1;

    // ---------------- results ----------------
    check(longint'(stats.rx_bytes) == exp_bytes, $sformatf("received %0d of %0d bytes", stats.rx_bytes, exp_bytes));
    check(longint'(stats.rx_pkts) == exp_pkts, $sformatf("received %0d of %0d packets", stats.rx_pkts, exp_pkts));
    check(longint'(stats.tx_pkts) == exp_pkts, "packets built");
    foreach (segs[s]) begin
      int bad;
      bad = 0;
      for (int i = 0; i < segs[s].len; i++)
        if (rd8(segs[s].dst + i) != pat(phys(segs[s].q, segs[s].src_va + i))) bad++;
      check(bad == 0, $sformatf("element %0d: %0d wrong bytes of %0d", s, bad, segs[s].len));
    end
    foreach (qs[k]) begin
      logic [23:0] psn;
      for (int i = 0; i < 3; i++) psn[8*i +: 8] = rd8(QPC_BASE + 64 * qs[k] + 3 + i);
      check(int'(psn) == qs[k] * 16 + pkts_of[qs[k]],
            $sformatf("QP %0d PSN in host memory %0d, expected %0d", qs[k], psn, qs[k] * 16 + pkts_of[qs[k]]));
    end
    check(kv_done && kv_answers == kv_sent, $sformatf("key-value: %0d of %0d answered", kv_answers, kv_sent));
    check(kv_stats[0] == 32'(kv_sent) && kv_stats[1] == 32'(kv_sent), "key-value request counters");
    check(kv_stats[2] == 17 && kv_stats[3] == 16 && kv_stats[4] == 9 && kv_stats[5] == 0,
          $sformatf("key-value hits %0d misses %0d sets %0d bad %0d", kv_stats[2], kv_stats[3], kv_stats[4], kv_stats[5]));
    // every mechanism happened
    check(stats.qcache_hits > 0,   "queue cache hit");
    check(stats.qcache_misses > 0, "queue cache miss");
    check(stats.qpc_hits > 0 && stats.qpc_misses > 0, "QPC cache hit and miss");
    check(stats.mpt_hits > 0 && stats.mpt_misses > 0, "MPT cache hit and miss");
    check(stats.mtt_hits > 0 && stats.mtt_misses > 0, "MTT cache hit and miss");
    check(cpl_ooo > 0,             "DMA completions out of order");
    check(wr_stalls > 0,           "bus write back-pressure");
    check(link_drops > 0,          "link lost packets");
    check(stats.ts_retx > 0,       "retransmission");
    check(stats.ts_timeouts > 0,   "retransmission timeout");
    check(stats.ts_naks > 0,       "NAK");
    check(stats.ts_acks > 0,       "ACK");
    check(stats.ts_ooo > 0,        "packet stored out of order");
    check(stats.ts_dups + stats.ts_drops > 0, "receiver dropped a duplicate or excess packet");
    $display("wqes=%0d throttled=%0d qcache %0d/%0d qpc %0d/%0d mpt %0d/%0d mtt %0d/%0d pkts=%0d",
             stats.wqes, stats.throttled, stats.qcache_hits, stats.qcache_misses,
             stats.qpc_hits, stats.qpc_misses, stats.mpt_hits, stats.mpt_misses,
             stats.mtt_hits, stats.mtt_misses, stats.tx_pkts);
    $display("ts: new=%0d retx=%0d timeouts=%0d acks=%0d naks=%0d ooo=%0d drops=%0d dups=%0d link_drops=%0d cpl_ooo=%0d",
             stats.ts_new, stats.ts_retx, stats.ts_timeouts, stats.ts_acks, stats.ts_naks,
             stats.ts_ooo, stats.ts_drops, stats.ts_dups, link_drops, cpl_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
