// jingzhao_nic: the NIC top: queue, semantics, resource and transport subsystems around
// one DMA engine, carrying RDMA WRITE traffic from host memory to a peer's host memory.
//
// Send path: a doorbell (PIO write of a queue's new tail) enters the queue subsystem,
// which fetches WQEs from the host rings through its queue cache, applies the rate
// limiter and emits sub-WQEs. The request core (req_trans_core) looks up MPT, QPC and MTT
// in three resource subsystems (caches of host-resident tables), gathers the payload by
// DMA and appends RETH and BTH. The transport subsystem numbers, sends, acknowledges and
// retransmits packets over the link.
// Receive path: the transport subsystem commits received packets in order; the receive
// core strips BTH and RETH and writes the payload to host memory by DMA.
//
// DMA clients: reads 0 WQE refill, 1 payload gather, 2 MPT, 3 MTT, 4 QPC; writes 0 QPC
// write-back, 1 received payload. Table caches fetch the aligned 64-byte beat holding an
// entry and pick the entry out by its offset (entries are stored at their size rounded up
// to a power of two: QPC 64 B, MPT 32 B, MTT 8 B, from icm_*_base).
//
// Interface: plain valid/ready ports; bus_* is the host-memory side of the DMA engine
// (tagged read requests, completions in any order, posted writes); link_* carries packets
// as beat_t with a ts_hdr_t sideband; stats gives the event counters.
// Sizes follow the paper's table: QPC 416x128, MPT 256x512, MTT 64x1024, queue cache
// 128x1024, DMA reorder buffer 512x512, dynamic buffers 512x32, 256 queues, 512-bit data
// path. Not present: the completion path (CQC and CQEs), SEND and READ semantics and
// the PCIe and Ethernet hard blocks.
// The key-value core (key_value_core) sits beside the RDMA path as a second application
// core: its requests and results (kv_req_*, kv_res_*) and its Ethernet-framed packets
// (kv_tx_*, kv_rx_*) have ports of their own and share no logic with the RDMA path; its
// counters are kv_stats {0 requests sent, 1 requests served, 2 hits, 3 misses, 4 sets,
// 5 malformed}.
module jingzhao_nic
  import jz_pkg::*;
#(
  parameter int unsigned NQ           = 256,
  parameter int unsigned KV_NHASH     = 16,
  parameter int unsigned KV_KEY_BYTES = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // driver: doorbells and configuration
  input  logic              db_valid,
  output logic              db_ready,
  input  logic [15:0]       db_qpn,
  input  logic [15:0]       db_tail,
  input  logic              qcfg_valid,
  input  logic [15:0]       qcfg_qpn,
  input  logic [ADDR_W-1:0] qcfg_base,
  input  logic [4:0]        qcfg_size_log,
  input  logic              rl_cfg_valid,
  input  logic [15:0]       rl_cfg_qpn,
  input  logic [31:0]       rl_cfg_window,
  input  logic [ADDR_W-1:0] icm_qpc_base,
  input  logic [ADDR_W-1:0] icm_mpt_base,
  input  logic [ADDR_W-1:0] icm_mtt_base,
  // host memory bus
  output logic              bus_rd_valid,
  input  logic              bus_rd_ready,
  output logic [ADDR_W-1:0] bus_rd_addr,
  output logic [LEN_W-1:0]  bus_rd_len,
  output logic [5:0]        bus_rd_tag,
  input  logic              bus_cpl_valid,
  input  logic [5:0]        bus_cpl_tag,
  input  logic [DATA_W-1:0] bus_cpl_data,
  output logic              bus_wr_valid,
  input  logic              bus_wr_ready,
  output logic [ADDR_W-1:0] bus_wr_addr,
  output beat_t             bus_wr_beat,
  // link
  output logic              link_tx_valid,
  input  logic              link_tx_ready,
  output beat_t             link_tx_beat,
  output ts_hdr_t           link_tx_hdr,
  input  logic              link_rx_valid,
  output logic              link_rx_ready,
  input  beat_t             link_rx_beat,
  input  ts_hdr_t           link_rx_hdr,
  // key-value core
  input  logic                      kv_req_valid,
  output logic                      kv_req_ready,
  input  logic                      kv_req_set,
  input  logic [5:0]                kv_req_key_len,
  input  logic [8*KV_KEY_BYTES-1:0] kv_req_key,
  input  logic [255:0]              kv_req_value,
  input  logic [47:0]               kv_req_dst_mac,
  output logic                      kv_res_valid,
  input  logic                      kv_res_ready,
  output logic [7:0]                kv_res_op,
  output logic [5:0]                kv_res_key_len,
  output logic [8*KV_KEY_BYTES-1:0] kv_res_key,
  output logic [255:0]              kv_res_value,
  output logic                      kv_tx_valid,
  input  logic                      kv_tx_ready,
  output beat_t                     kv_tx_beat,
  input  logic                      kv_rx_valid,
  output logic                      kv_rx_ready,
  input  beat_t                     kv_rx_beat,
  // counters
  output nic_stats_t                stats,
  output logic [5:0][31:0]          kv_stats
);
  localparam int unsigned NRD = 5, NWR = 2;
  localparam int unsigned QPC_W = 416, MPT_W = 256, MTT_W = 64;
  localparam int unsigned ROB = 128, TGW = $clog2(ROB);
  localparam int unsigned C_WQE = 0, C_GATHER = 1, C_MPT = 2, C_MTT = 3, C_QPC = 4;
  localparam int unsigned W_QPC = 0, W_RECV = 1;

  // ---------------- DMA engine ----------------
  logic [NRD-1:0]             rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  logic [NRD-1:0][ADDR_W-1:0] rd_req_addr;
  logic [NRD-1:0][LEN_W-1:0]  rd_req_len;
  logic [NRD-1:0][7:0]        rd_req_user;
  beat_t                      rd_rsp_beat;
  logic [7:0]                 rd_rsp_user;
  logic [NWR-1:0]             wr_valid, wr_ready;
  logic [NWR-1:0][ADDR_W-1:0] wr_addr;
  beat_t [NWR-1:0]            wr_beat;

  dma_engine #(.NRD(NRD), .NWR(NWR), .MRRS(512), .MPS(512), .NTAGS(64), .USER_W(8)) u_dma (
    .clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len, .rd_req_user,
    .rd_rsp_valid, .rd_rsp_ready, .rd_rsp_beat, .rd_rsp_user,
    .wr_valid, .wr_ready, .wr_addr, .wr_beat,
    .bus_rd_valid, .bus_rd_ready, .bus_rd_addr, .bus_rd_len, .bus_rd_tag,
    .bus_cpl_valid, .bus_cpl_tag, .bus_cpl_data,
    .bus_wr_valid, .bus_wr_ready, .bus_wr_addr, .bus_wr_beat);

  // ---------------- Queue Subsystem ----------------
  logic     sub_valid, sub_ready;
  sub_wqe_t sub_wqe;
  queue_subsystem #(.NQ(NQ), .SLOT_W(128), .SLOTS(1024), .CELL_SLOTS(16)) u_qs (
    .clk, .rst_n,
    .db_valid, .db_ready, .db_qpn, .db_tail,
    .qcfg_valid, .qcfg_qpn, .qcfg_base, .qcfg_size_log,
    .rl_cfg_valid, .rl_cfg_qpn, .rl_cfg_window,
    .sub_valid, .sub_ready, .sub_wqe,
    .dma_rd_valid(rd_req_valid[C_WQE]), .dma_rd_ready(rd_req_ready[C_WQE]),
    .dma_rd_addr(rd_req_addr[C_WQE]), .dma_rd_len(rd_req_len[C_WQE]),
    .dma_rsp_valid(rd_rsp_valid[C_WQE]), .dma_rsp_ready(rd_rsp_ready[C_WQE]),
    .dma_rsp_beat(rd_rsp_beat),
    .stat_wqes(stats.wqes), .stat_throttled(stats.throttled),
    .stat_cache_hits(stats.qcache_hits), .stat_cache_misses(stats.qcache_misses));
  assign rd_req_user[C_WQE] = '0;

  // ---------------- Resource Subsystem: QPC, MPT, MTT caches ----------------
  // request core side
  logic              mpt_req_valid, mpt_req_ready, mpt_rsp_valid, mpt_rsp_ready;
  logic [23:0]       mpt_req_key;
  logic [MPT_W-1:0]  mpt_rsp_data;
  logic              mtt_req_valid, mtt_req_ready, mtt_rsp_valid, mtt_rsp_ready;
  logic [23:0]       mtt_req_key;
  logic [MTT_W-1:0]  mtt_rsp_data;
  logic              qpc_req_valid, qpc_req_ready, qpc_rsp_valid, qpc_rsp_ready;
  logic [23:0]       qpc_req_key;
  logic [QPC_W-1:0]  qpc_rsp_data;
  logic              qpc_wr_valid, qpc_wr_ready;
  logic [23:0]       qpc_wr_key;
  logic [QPC_W-1:0]  qpc_wr_data;
  logic [15:0]       sub_conn;    // QP of the request core's current sub-WQE
  // DMA side of each cache
  logic              qpc_drd_valid, mpt_drd_valid, mtt_drd_valid;
  logic [ADDR_W-1:0] qpc_drd_addr, mpt_drd_addr, mtt_drd_addr;
  logic [TGW-1:0]    qpc_drd_tag, mpt_drd_tag, mtt_drd_tag;
  logic              qpc_dwr_valid;
  logic [ADDR_W-1:0] qpc_dwr_addr;
  logic [QPC_W-1:0]  qpc_dwr_data;
  logic [1:0]        qpc_rsp_v2, mpt_rsp_v2, mtt_rsp_v2;
  logic [1:0]        qpc_rq_r2, mpt_rq_r2, mtt_rq_r2, qpc_wr_r2, mpt_wr_r2, mtt_wr_r2;
  logic [23:0]       qpc_rsp_key, mpt_rsp_key, mtt_rsp_key;
  logic              mpt_dwr_valid, mtt_dwr_valid;
  logic [ADDR_W-1:0] mpt_dwr_addr, mtt_dwr_addr;
  logic [MPT_W-1:0]  mpt_dwr_data;
  logic [MTT_W-1:0]  mtt_dwr_data;

  // entry offset inside the fetched 64-byte beat, remembered per DMA tag
  logic [5:0] qpc_off [ROB], mpt_off [ROB], mtt_off [ROB];
  logic [DATA_W-1:0] mpt_beat_sh, mtt_beat_sh, qpc_beat_sh;
  assign qpc_beat_sh = rd_rsp_beat.data >> {qpc_off[TGW'(rd_rsp_user)], 3'd0};
  assign mpt_beat_sh = rd_rsp_beat.data >> {mpt_off[TGW'(rd_rsp_user)], 3'd0};
  assign mtt_beat_sh = rd_rsp_beat.data >> {mtt_off[TGW'(rd_rsp_user)], 3'd0};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ROB; i++) begin
        qpc_off[i] <= '0;
        mpt_off[i] <= '0;
        mtt_off[i] <= '0;
      end
    end else begin
      if (qpc_drd_valid && rd_req_ready[C_QPC]) qpc_off[qpc_drd_tag] <= qpc_drd_addr[5:0];
      if (mpt_drd_valid && rd_req_ready[C_MPT]) mpt_off[mpt_drd_tag] <= mpt_drd_addr[5:0];
      if (mtt_drd_valid && rd_req_ready[C_MTT]) mtt_off[mtt_drd_tag] <= mtt_drd_addr[5:0];
    end
  end

  assign rd_req_valid[C_QPC] = qpc_drd_valid;
  assign rd_req_addr[C_QPC]  = {qpc_drd_addr[ADDR_W-1:6], 6'd0};
  assign rd_req_len[C_QPC]   = LEN_W'(64);
  assign rd_req_user[C_QPC]  = 8'(qpc_drd_tag);
  assign rd_rsp_ready[C_QPC] = 1'b1;
  assign rd_req_valid[C_MPT] = mpt_drd_valid;
  assign rd_req_addr[C_MPT]  = {mpt_drd_addr[ADDR_W-1:6], 6'd0};
  assign rd_req_len[C_MPT]   = LEN_W'(64);
  assign rd_req_user[C_MPT]  = 8'(mpt_drd_tag);
  assign rd_rsp_ready[C_MPT] = 1'b1;
  assign rd_req_valid[C_MTT] = mtt_drd_valid;
  assign rd_req_addr[C_MTT]  = {mtt_drd_addr[ADDR_W-1:6], 6'd0};
  assign rd_req_len[C_MTT]   = LEN_W'(64);
  assign rd_req_user[C_MTT]  = 8'(mtt_drd_tag);
  assign rd_rsp_ready[C_MTT] = 1'b1;

  // QPC entries are whole beats (64 B); their write-back is one DMA write
  assign wr_valid[W_QPC]       = qpc_dwr_valid;
  assign wr_addr[W_QPC]        = qpc_dwr_addr;
  assign wr_beat[W_QPC].data   = DATA_W'(qpc_dwr_data);
  assign wr_beat[W_QPC].nbytes = 7'd64;
  assign wr_beat[W_QPC].last   = 1'b1;

  resource_subsystem #(.ENTRY_W(QPC_W), .DEPTH(128), .KEY_W(24), .CONN_W(16), .NCH(2),
                       .NCONNQ(8), .ROB_DEPTH(ROB)) u_qpc (
    .clk, .rst_n, .icm_base(icm_qpc_base),
    .rd_req_valid({1'b0, qpc_req_valid}), .rd_req_ready(qpc_rq_r2),
    .rd_req_key({24'd0, qpc_req_key}), .rd_req_conn({16'd0, 16'(qpc_req_key)}),
    .rd_rsp_valid(qpc_rsp_v2), .rd_rsp_ready({1'b1, qpc_rsp_ready}),
    .rd_rsp_data(qpc_rsp_data), .rd_rsp_key(qpc_rsp_key),
    .wr_req_valid({1'b0, qpc_wr_valid}), .wr_req_ready(qpc_wr_r2),
    .wr_req_key({24'd0, qpc_wr_key}), .wr_req_del(2'b00), .wr_req_data({QPC_W'(0), qpc_wr_data}),
    .dma_rd_valid(qpc_drd_valid), .dma_rd_ready(rd_req_ready[C_QPC]), .dma_rd_addr(qpc_drd_addr),
    .dma_rd_tag(qpc_drd_tag),
    .dma_rsp_valid(rd_rsp_valid[C_QPC]), .dma_rsp_tag(TGW'(rd_rsp_user)),
    .dma_rsp_data(qpc_beat_sh[QPC_W-1:0]),
    .dma_wr_valid(qpc_dwr_valid), .dma_wr_ready(wr_ready[W_QPC]), .dma_wr_addr(qpc_dwr_addr),
    .dma_wr_data(qpc_dwr_data),
    .stat_hits(stats.qpc_hits), .stat_misses(stats.qpc_misses));
  assign qpc_req_ready = qpc_rq_r2[0];
  assign qpc_rsp_valid = qpc_rsp_v2[0];
  assign qpc_wr_ready  = qpc_wr_r2[0];

  resource_subsystem #(.ENTRY_W(MPT_W), .DEPTH(512), .KEY_W(24), .CONN_W(16), .NCH(2),
                       .NCONNQ(8), .ROB_DEPTH(ROB)) u_mpt (
    .clk, .rst_n, .icm_base(icm_mpt_base),
    .rd_req_valid({1'b0, mpt_req_valid}), .rd_req_ready(mpt_rq_r2),
    .rd_req_key({24'd0, mpt_req_key}), .rd_req_conn({16'd0, sub_conn}),
    .rd_rsp_valid(mpt_rsp_v2), .rd_rsp_ready({1'b1, mpt_rsp_ready}),
    .rd_rsp_data(mpt_rsp_data), .rd_rsp_key(mpt_rsp_key),
    .wr_req_valid(2'b00), .wr_req_ready(mpt_wr_r2),
    .wr_req_key('0), .wr_req_del(2'b00), .wr_req_data('0),
    .dma_rd_valid(mpt_drd_valid), .dma_rd_ready(rd_req_ready[C_MPT]), .dma_rd_addr(mpt_drd_addr),
    .dma_rd_tag(mpt_drd_tag),
    .dma_rsp_valid(rd_rsp_valid[C_MPT]), .dma_rsp_tag(TGW'(rd_rsp_user)),
    .dma_rsp_data(mpt_beat_sh[MPT_W-1:0]),
    .dma_wr_valid(mpt_dwr_valid), .dma_wr_ready(1'b1), .dma_wr_addr(mpt_dwr_addr),
    .dma_wr_data(mpt_dwr_data),
    .stat_hits(stats.mpt_hits), .stat_misses(stats.mpt_misses));
  assign mpt_req_ready = mpt_rq_r2[0];
  assign mpt_rsp_valid = mpt_rsp_v2[0];

  resource_subsystem #(.ENTRY_W(MTT_W), .DEPTH(1024), .KEY_W(24), .CONN_W(16), .NCH(2),
                       .NCONNQ(8), .ROB_DEPTH(ROB)) u_mtt (
    .clk, .rst_n, .icm_base(icm_mtt_base),
    .rd_req_valid({1'b0, mtt_req_valid}), .rd_req_ready(mtt_rq_r2),
    .rd_req_key({24'd0, mtt_req_key}), .rd_req_conn({16'd0, sub_conn}),
    .rd_rsp_valid(mtt_rsp_v2), .rd_rsp_ready({1'b1, mtt_rsp_ready}),
    .rd_rsp_data(mtt_rsp_data), .rd_rsp_key(mtt_rsp_key),
    .wr_req_valid(2'b00), .wr_req_ready(mtt_wr_r2),
    .wr_req_key('0), .wr_req_del(2'b00), .wr_req_data('0),
    .dma_rd_valid(mtt_drd_valid), .dma_rd_ready(rd_req_ready[C_MTT]), .dma_rd_addr(mtt_drd_addr),
    .dma_rd_tag(mtt_drd_tag),
    .dma_rsp_valid(rd_rsp_valid[C_MTT]), .dma_rsp_tag(TGW'(rd_rsp_user)),
    .dma_rsp_data(mtt_beat_sh[MTT_W-1:0]),
    .dma_wr_valid(mtt_dwr_valid), .dma_wr_ready(1'b1), .dma_wr_addr(mtt_dwr_addr),
    .dma_wr_data(mtt_dwr_data),
    .stat_hits(stats.mtt_hits), .stat_misses(stats.mtt_misses));
  assign mtt_req_ready = mtt_rq_r2[0];
  assign mtt_rsp_valid = mtt_rsp_v2[0];

  // ---------------- Semantics: request core ----------------
  logic        rtc_valid, rtc_ready;
  beat_t       rtc_beat;

  req_trans_core #(.MTU(512), .PAGE_LOG(12), .MPT_W(MPT_W), .MTT_W(MTT_W), .QPC_W(QPC_W),
                   .KEY_W(24)) u_rtc (
    .clk, .rst_n,
    .sub_valid, .sub_ready, .sub_wqe,
    .mpt_req_valid, .mpt_req_ready, .mpt_req_key, .mpt_rsp_valid, .mpt_rsp_ready, .mpt_rsp_data,
    .mtt_req_valid, .mtt_req_ready, .mtt_req_key, .mtt_rsp_valid, .mtt_rsp_ready, .mtt_rsp_data,
    .qpc_req_valid, .qpc_req_ready, .qpc_req_key, .qpc_rsp_valid, .qpc_rsp_ready, .qpc_rsp_data,
    .qpc_wr_valid, .qpc_wr_ready, .qpc_wr_key, .qpc_wr_data,
    .dma_rd_valid(rd_req_valid[C_GATHER]), .dma_rd_ready(rd_req_ready[C_GATHER]),
    .dma_rd_addr(rd_req_addr[C_GATHER]), .dma_rd_len(rd_req_len[C_GATHER]),
    .dma_rsp_valid(rd_rsp_valid[C_GATHER]), .dma_rsp_ready(rd_rsp_ready[C_GATHER]),
    .dma_rsp_beat(rd_rsp_beat),
    .out_valid(rtc_valid), .out_ready(rtc_ready), .out_beat(rtc_beat),
    .stat_pkts(stats.tx_pkts), .stat_unsupported(stats.unsupported),
    .cur_qpn(sub_conn));
  assign rd_req_user[C_GATHER] = '0;

  // ---------------- Transport Subsystem ----------------
  logic  rx_valid, rx_ready;
  beat_t rx_beat;
  transport_subsystem #(.BUF_DEPTH(32), .WIN(16), .TIMEOUT(2048), .MAX_BEATS(9), .GBN(1'b0)) u_ts (
    .clk, .rst_n,
    .tx_in_valid(rtc_valid), .tx_in_ready(rtc_ready), .tx_in_beat(rtc_beat),
    .link_tx_valid, .link_tx_ready, .link_tx_beat, .link_tx_hdr,
    .link_rx_valid, .link_rx_ready, .link_rx_beat, .link_rx_hdr,
    .rx_out_valid(rx_valid), .rx_out_ready(rx_ready), .rx_out_beat(rx_beat),
    .stat_tx_new(stats.ts_new), .stat_retx(stats.ts_retx), .stat_timeouts(stats.ts_timeouts),
    .stat_ack_rx(stats.ts_acks), .stat_nak_rx(stats.ts_naks), .stat_ooo(stats.ts_ooo),
    .stat_drop(stats.ts_drops), .stat_dup(stats.ts_dups));

  // ---------------- receive core ----------------
  req_recv_core u_rrc (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_beat(rx_beat),
    .wr_valid(wr_valid[W_RECV]), .wr_ready(wr_ready[W_RECV]), .wr_addr(wr_addr[W_RECV]),
    .wr_beat(wr_beat[W_RECV]),
    .stat_pkts(stats.rx_pkts), .stat_bytes(stats.rx_bytes));

  // ---------------- key-value core ----------------
  key_value_core #(.NHASH(KV_NHASH), .KEY_BYTES(KV_KEY_BYTES)) u_kv (
    .clk, .rst_n,
    .req_valid(kv_req_valid), .req_ready(kv_req_ready), .req_set(kv_req_set),
    .req_key_len(kv_req_key_len), .req_key(kv_req_key), .req_value(kv_req_value),
    .req_dst_mac(kv_req_dst_mac),
    .res_valid(kv_res_valid), .res_ready(kv_res_ready), .res_op(kv_res_op),
    .res_key_len(kv_res_key_len), .res_key(kv_res_key), .res_value(kv_res_value),
    .out_valid(kv_tx_valid), .out_ready(kv_tx_ready), .out_beat(kv_tx_beat),
    .in_valid(kv_rx_valid), .in_ready(kv_rx_ready), .in_beat(kv_rx_beat),
    .stat_req_tx(kv_stats[0]), .stat_req_rx(kv_stats[1]), .stat_hits(kv_stats[2]),
    .stat_misses(kv_stats[3]), .stat_sets(kv_stats[4]), .stat_bad(kv_stats[5]));
endmodule
