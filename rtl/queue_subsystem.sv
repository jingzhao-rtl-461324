// queue_subsystem: turns doorbells into a stream of sub-WQEs (Queue Subsystem).
//
// Queue Status keeps, per queue, the ring's host address and size, the head (next WQE to
// fetch) and the tail (set by the doorbell) as free-running 16-bit WQE counters, and
// whether the queue is in the scheduler. The Queue Scheduler holds the queues that have
// work in a FIFO: a doorbell updates the tail and enters the queue if it was idle. The WQE
// Fetcher takes the next queue, gets the WQE at its head from the Queue Cache and hands it
// to the WQE Parser, which checks the Rate Limiter and emits sub-WQEs. Afterwards the head
// advances if the WQE was consumed, and the queue goes back into the scheduler while head
// != tail, so that queues take turns one WQE at a time until all are empty.
// The block structure and this flow follow the paper. This design's own choices: one WQE
// is in flight at a time (fetch, parse and update are not overlapped), the queue-setup
// port standing for the driver's register writes, and that a doorbell is held off
// (db_ready low) in the one clock in which a queue is re-entered.
module queue_subsystem
  import jz_pkg::*;
#(
  parameter int unsigned NQ         = 256,
  parameter int unsigned SLOT_W     = 128,
  parameter int unsigned SLOTS      = 1024,
  parameter int unsigned CELL_SLOTS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // doorbell (PIO)
  input  logic              db_valid,
  output logic              db_ready,
  input  logic [15:0]       db_qpn,
  input  logic [15:0]       db_tail,
  // queue setup by the driver
  input  logic              qcfg_valid,
  input  logic [15:0]       qcfg_qpn,
  input  logic [ADDR_W-1:0] qcfg_base,
  input  logic [4:0]        qcfg_size_log,
  // rate limiter windows (congestion-control interface)
  input  logic              rl_cfg_valid,
  input  logic [15:0]       rl_cfg_qpn,
  input  logic [31:0]       rl_cfg_window,
  // sub-WQEs to the semantics subsystem
  output logic              sub_valid,
  input  logic              sub_ready,
  output sub_wqe_t          sub_wqe,
  // WQE refill DMA
  output logic              dma_rd_valid,
  input  logic              dma_rd_ready,
  output logic [ADDR_W-1:0] dma_rd_addr,
  output logic [LEN_W-1:0]  dma_rd_len,
  input  logic              dma_rsp_valid,
  output logic              dma_rsp_ready,
  input  beat_t             dma_rsp_beat,
  // statistics
  output logic [31:0]       stat_wqes,
  output logic [31:0]       stat_throttled,
  output logic [31:0]       stat_cache_hits,
  output logic [31:0]       stat_cache_misses
);
  localparam int unsigned QW = $clog2(NQ);
  typedef logic [QW-1:0] q_t;

  // ---------------- Queue Status ----------------
  logic [15:0]       q_head [NQ];
  logic [15:0]       q_tail [NQ];
  logic [ADDR_W-1:0] q_base [NQ];
  logic [4:0]        q_size [NQ];
  logic [NQ-1:0]     q_active;

  // ---------------- Queue Scheduler FIFO ----------------
  logic rf_push, rf_pop, rf_full, rf_empty;
  q_t   rf_din, rf_head;
  sync_fifo #(.T(q_t), .DEPTH(NQ)) u_ready (
    .clk, .rst_n, .push(rf_push), .din(rf_din), .full(rf_full),
    .pop(rf_pop), .dout(rf_head), .empty(rf_empty), .count());

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_WAIT_WQE, S_PARSE, S_UPDATE} state_e;
  state_e state;
  q_t     cur;

  // queue cache
  logic qc_req_ready, qc_rsp_valid;
  logic [DATA_W-1:0] qc_wqe;
  queue_cache #(.SLOT_W(SLOT_W), .SLOTS(SLOTS), .CELL_SLOTS(CELL_SLOTS),
                .WQE_SEGS(DATA_W / SLOT_W)) u_qcache (
    .clk, .rst_n,
    .req_valid(state == S_FETCH), .req_ready(qc_req_ready), .req_qpn(16'(cur)),
    .req_idx(q_head[cur]), .req_avail(q_tail[cur] - q_head[cur]), .req_base(q_base[cur]),
    .req_size_log(q_size[cur]),
    .rsp_valid(qc_rsp_valid), .rsp_wqe(qc_wqe),
    .dma_rd_valid, .dma_rd_ready, .dma_rd_addr, .dma_rd_len,
    .dma_rsp_valid, .dma_rsp_ready, .dma_rsp_beat,
    .stat_hits(stat_cache_hits), .stat_misses(stat_cache_misses));

  // WQE parser and rate limiter
  logic        p_in_ready, p_done, p_consumed, rl_ok, rl_charge;
  logic [QW-1:0] rl_qpn;
  logic [31:0] rl_len;
  wqe_parser #(.NQ(NQ)) u_parser (
    .clk, .rst_n,
    .in_valid(qc_rsp_valid), .in_ready(p_in_ready), .in_wqe(qc_wqe), .in_qpn(16'(cur)),
    .rl_qpn, .rl_len, .rl_ok, .rl_charge,
    .out_valid(sub_valid), .out_ready(sub_ready), .out_sub(sub_wqe),
    .done(p_done), .done_consumed(p_consumed));
  rate_limiter #(.NQ(NQ), .CNT_W(32)) u_rl (
    .clk, .rst_n,
    .chk_qpn(rl_qpn), .chk_len(rl_len), .chk_ok(rl_ok),
    .charge_valid(rl_charge), .charge_qpn(rl_qpn), .charge_len(rl_len),
    .cfg_valid(rl_cfg_valid), .cfg_qpn(rl_cfg_qpn[QW-1:0]), .cfg_window(rl_cfg_window),
    .sent_of_chk());

  // scheduler pushes: re-entry from S_UPDATE, else a doorbell for an idle queue
  logic requeue, db_fire, db_enter;
  q_t   dbq;
  assign dbq      = db_qpn[QW-1:0];
  assign requeue  = (state == S_UPDATE) && (q_head[cur] != q_tail[cur]);
  assign db_ready = (state != S_UPDATE);
  assign db_fire  = db_valid && db_ready;
  assign db_enter = db_fire && !q_active[dbq] && (db_tail != q_head[dbq]);
  assign rf_push  = requeue || db_enter;
  assign rf_din   = requeue ? cur : dbq;
  assign rf_pop   = (state == S_IDLE) && !rf_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cur            <= '0;
      q_active       <= '0;
      stat_wqes      <= '0;
      stat_throttled <= '0;
      for (int q = 0; q < NQ; q++) begin
        q_head[q] <= '0;
        q_tail[q] <= '0;
        q_base[q] <= '0;
        q_size[q] <= '0;
      end
    end else begin
      if (qcfg_valid) begin
        q_base[qcfg_qpn[QW-1:0]] <= qcfg_base;
        q_size[qcfg_qpn[QW-1:0]] <= qcfg_size_log;
        q_head[qcfg_qpn[QW-1:0]] <= '0;
        q_tail[qcfg_qpn[QW-1:0]] <= '0;
      end
      if (db_fire) begin
        q_tail[dbq] <= db_tail;
        if (db_enter) q_active[dbq] <= 1'b1;
      end
      unique case (state)
        S_IDLE: if (!rf_empty) begin
          cur   <= rf_head;
          state <= S_FETCH;
        end
        S_FETCH:    if (qc_req_ready) state <= S_WAIT_WQE;
        S_WAIT_WQE: if (qc_rsp_valid) state <= S_PARSE;
        S_PARSE: if (p_done) begin
          if (p_consumed) begin
            q_head[cur] <= q_head[cur] + 1'b1;
            stat_wqes   <= stat_wqes + 1;
          end else begin
            stat_throttled <= stat_throttled + 1;
          end
          state <= S_UPDATE;
        end
        S_UPDATE: begin
          if (!requeue) q_active[cur] <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_parser_free: assert property (@(posedge clk) disable iff (!rst_n)
    qc_rsp_valid |-> p_in_ready) else $error("queue_subsystem: parser busy when a WQE arrives");
  a_no_sched_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rf_push |-> !rf_full) else $error("queue_subsystem: scheduler FIFO overflow");
endmodule
