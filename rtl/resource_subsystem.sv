// resource_subsystem: an on-chip cache of one kind of protocol resource (for example the
// QP contexts) whose home copy lives in host memory, shared by NCH pipeline channels.
//
// Read path (CacheRead), non-blocking on a miss:
//   1. the read requests of the NCH channels are arbitrated round-robin into a ReqFIFO;
//   2. the head of the ReqFIFO is moved to the lookup stage;
//   3. the lookup compares the tag of the direct-mapped Cache Buffer line. The request
//      takes a ReorderBuffer entry, whose number is queued in a MultiQueue under the
//      request's connection. A hit writes the line into the entry; a miss leaves the entry
//      waiting and sends a DMA read for the entry's host address;
//   4. DMA read responses fill their entry and refill the cache. The response side visits
//      the non-empty connection queues round-robin and returns the head entry of a queue
//      once it is filled.
// A miss therefore holds back only the later requests of its own connection; requests of
// other connections, hit or miss, pass it. Responses of one connection keep their order.
// Write path (CacheModify): a write updates the cache line and is written through to host
// memory by DMA; a delete invalidates the line. The Cache Buffer has one write port;
// refills have priority over CacheModify.
//
// The thread structure, ReqFIFO, ReorderBuffer, MultiQueue and the per-connection order
// rule come from the paper. This design's own choices: direct mapping, write-through,
// host address = icm_base + key * HOST_STRIDE (default: entry size rounded up to a power of two), the ReorderBuffer's filled bit in place of
// a separate ReqHitFIFO, one lookup per clock, and that a refill does not overwrite a line
// a later write has already installed.
//
// Timing: a hit returns 3 clocks after the request is accepted; a miss returns one clock
// after its DMA response. A channel's rd_rsp_valid is held until its rd_rsp_ready.
module resource_subsystem
  import jz_pkg::*;
#(
  parameter int unsigned ENTRY_W   = 416,  // bits of one resource entry
  parameter int unsigned DEPTH     = 128,  // cache lines
  parameter int unsigned KEY_W     = 24,   // resource index width
  parameter int unsigned CONN_W    = 16,   // connection id width
  parameter int unsigned NCH       = 2,    // pipeline channels (ResChnl)
  parameter int unsigned NCONNQ    = 8,    // logical queues of the MultiQueue
  parameter int unsigned ROB_DEPTH = 128,  // ReorderBuffer entries = DMA reads in flight
  parameter int unsigned HOST_STRIDE = 2 ** $clog2((ENTRY_W + 7) / 8)  // bytes per entry in host memory
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [ADDR_W-1:0]            icm_base,
  // CacheRead channels
  input  logic [NCH-1:0]               rd_req_valid,
  output logic [NCH-1:0]               rd_req_ready,
  input  logic [NCH-1:0][KEY_W-1:0]    rd_req_key,
  input  logic [NCH-1:0][CONN_W-1:0]   rd_req_conn,
  output logic [NCH-1:0]               rd_rsp_valid,
  input  logic [NCH-1:0]               rd_rsp_ready,
  output logic [ENTRY_W-1:0]           rd_rsp_data,
  output logic [KEY_W-1:0]             rd_rsp_key,
  // CacheModify channels
  input  logic [NCH-1:0]               wr_req_valid,
  output logic [NCH-1:0]               wr_req_ready,
  input  logic [NCH-1:0][KEY_W-1:0]    wr_req_key,
  input  logic [NCH-1:0]               wr_req_del,
  input  logic [NCH-1:0][ENTRY_W-1:0]  wr_req_data,
  // DMA
  output logic                         dma_rd_valid,
  input  logic                         dma_rd_ready,
  output logic [ADDR_W-1:0]            dma_rd_addr,
  output logic [$clog2(ROB_DEPTH)-1:0] dma_rd_tag,
  input  logic                         dma_rsp_valid,
  input  logic [$clog2(ROB_DEPTH)-1:0] dma_rsp_tag,
  input  logic [ENTRY_W-1:0]           dma_rsp_data,
  output logic                         dma_wr_valid,
  input  logic                         dma_wr_ready,
  output logic [ADDR_W-1:0]            dma_wr_addr,
  output logic [ENTRY_W-1:0]           dma_wr_data,
  // statistics
  output logic [31:0]                  stat_hits,
  output logic [31:0]                  stat_misses
);
  localparam int unsigned ENTRY_BYTES = HOST_STRIDE;
  localparam int unsigned IW   = $clog2(DEPTH);
  localparam int unsigned TW   = KEY_W - IW;          // cache tag width
  localparam int unsigned RW   = $clog2(ROB_DEPTH);
  localparam int unsigned CW   = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned QW   = $clog2(NCONNQ);

  typedef logic [RW-1:0] rtag_t;
  typedef struct packed {
    logic [KEY_W-1:0]  key;
    logic [CONN_W-1:0] conn;
    logic [CW-1:0]     chan;
  } req_t;
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    rtag_t             tag;
  } miss_t;
  typedef struct packed {
    logic [ADDR_W-1:0]  addr;
    logic [ENTRY_W-1:0] data;
  } wr_t;

  function automatic logic [ADDR_W-1:0] host_addr(input logic [KEY_W-1:0] k);
    return icm_base + ADDR_W'(k) * ADDR_W'(ENTRY_BYTES);
  endfunction

  // ---------------- Cache Buffer ----------------
  logic [ENTRY_W-1:0] line_data  [DEPTH];
  logic [TW-1:0]      line_tag   [DEPTH];
  logic [DEPTH-1:0]   line_valid;

  // ---------------- thread 1: arbitrate into the ReqFIFO ----------------
  logic [CW-1:0] rd_rr;
  logic          rq_full, rq_empty, rq_push, rq_pop;
  req_t          rq_din, rq_dout;
  logic [CW-1:0] rd_sel;
  logic          rd_any;

  always_comb begin
    rd_any = 1'b0;
    rd_sel = '0;
    for (int i = 0; i < NCH; i++) begin
      int c;
      c = (int'(rd_rr) + i) % NCH;
      if (!rd_any && rd_req_valid[c]) begin
        rd_any = 1'b1;
        rd_sel = CW'(c);
      end
    end
  end
  assign rq_push = rd_any && !rq_full;
  assign rq_din  = '{key: rd_req_key[rd_sel], conn: rd_req_conn[rd_sel], chan: rd_sel};
  always_comb begin
    rd_req_ready = '0;
    rd_req_ready[rd_sel] = rq_push;
  end

  sync_fifo #(.T(req_t), .DEPTH(4)) u_reqfifo (
    .clk, .rst_n, .push(rq_push), .din(rq_din), .full(rq_full),
    .pop(rq_pop), .dout(rq_dout), .empty(rq_empty), .count());

  // ---------------- thread 2: move to the lookup stage ----------------
  logic s3_valid;
  req_t s3_req;
  logic s3_go;                       // thread 3 dispatches this cycle
  assign rq_pop = !rq_empty && (!s3_valid || s3_go);

  // ---------------- thread 3: lookup and dispatch ----------------
  logic [IW-1:0] s3_idx;
  logic          s3_hit;
  logic          tf_empty, tf_full, tf_push, tf_pop;
  rtag_t         tf_head, tf_din;
  logic          mq_enq_ready, mq_peek_valid, mq_deq;
  logic [RW-1:0] mq_peek_data;
  logic [NCONNQ-1:0] mq_nonempty;
  logic          mf_full, mf_empty, mf_push;
  miss_t         mf_dout;
  logic          init_busy;
  rtag_t         init_cnt;

  assign s3_idx = s3_req.key[IW-1:0];
  assign s3_hit = line_valid[s3_idx] && line_tag[s3_idx] == s3_req.key[KEY_W-1:IW];
  assign s3_go  = s3_valid && !tf_empty && !init_busy && mq_enq_ready && (s3_hit || !mf_full);
  assign tf_pop = s3_go;
  assign mf_push = s3_go && !s3_hit;

  // ReorderBuffer tag free list, filled with every tag after reset
  assign tf_push = init_busy || mq_deq;
  assign tf_din  = init_busy ? init_cnt : mq_peek_data;
  sync_fifo #(.T(rtag_t), .DEPTH(ROB_DEPTH)) u_tagfree (
    .clk, .rst_n, .push(tf_push), .din(tf_din), .full(tf_full),
    .pop(tf_pop), .dout(tf_head), .empty(tf_empty), .count());

  // ReqMissFIFO: DMA reads to issue
  sync_fifo #(.T(miss_t), .DEPTH(4)) u_missfifo (
    .clk, .rst_n, .push(mf_push), .din('{addr: host_addr(s3_req.key), tag: tf_head}),
    .full(mf_full), .pop(dma_rd_valid && dma_rd_ready), .dout(mf_dout), .empty(mf_empty),
    .count());
  assign dma_rd_valid = !mf_empty;
  assign dma_rd_addr  = mf_dout.addr;
  assign dma_rd_tag   = mf_dout.tag;

  // ---------------- ReorderBuffer and MultiQueue ----------------
  logic [ENTRY_W-1:0] rob_data  [ROB_DEPTH];
  logic [KEY_W-1:0]   rob_key   [ROB_DEPTH];
  logic [CW-1:0]      rob_chan  [ROB_DEPTH];
  logic [ROB_DEPTH-1:0] rob_full;     // entry holds its data

  logic [QW-1:0] out_q;               // connection queue visited by thread 4
  multi_queue #(.DATA_W(RW), .DEPTH(ROB_DEPTH), .NQ(NCONNQ)) u_mq (
    .clk, .rst_n,
    .enq_valid(s3_go), .enq_qid(s3_req.conn[QW-1:0]), .enq_data(tf_head), .enq_ready(mq_enq_ready),
    .peek_qid(out_q), .peek_valid(mq_peek_valid), .peek_data(mq_peek_data),
    .deq_valid(mq_deq), .deq_qid(out_q), .nonempty(mq_nonempty), .free_count());

  // ---------------- thread 4: fill and return ----------------
  rtag_t         head_tag;
  logic          head_ready;
  logic [CW-1:0] head_chan;
  assign head_tag   = mq_peek_data;
  assign head_chan  = rob_chan[head_tag];
  assign head_ready = mq_peek_valid && rob_full[head_tag];
  assign mq_deq     = head_ready && rd_rsp_ready[head_chan];
  assign rd_rsp_data = rob_data[head_tag];
  assign rd_rsp_key  = rob_key[head_tag];
  always_comb begin
    rd_rsp_valid = '0;
    rd_rsp_valid[head_chan] = head_ready;
  end

  // next non-empty connection queue after out_q
  function automatic logic [QW-1:0] next_q(input logic [QW-1:0] cur, input logic [NCONNQ-1:0] ne);
    logic [QW-1:0] r;
    logic found;
    r = cur;
    found = 1'b0;
    for (int i = 1; i <= NCONNQ; i++) begin
      logic [QW-1:0] c;
      c = QW'((int'(cur) + i) % NCONNQ);
      if (!found && ne[c]) begin
        r = c;
        found = 1'b1;
      end
    end
    return r;
  endfunction

  // refill of the cache line of a DMA response (skipped if a write installed the key)
  logic [KEY_W-1:0] fill_key;
  logic [IW-1:0]    fill_idx;
  logic             fill_en;
  assign fill_key = rob_key[dma_rsp_tag];
  assign fill_idx = fill_key[IW-1:0];
  assign fill_en  = dma_rsp_valid &&
                    !(line_valid[fill_idx] && line_tag[fill_idx] == fill_key[KEY_W-1:IW]);

  // ---------------- CacheModify ----------------
  logic [CW-1:0] wr_rr, wr_sel;
  logic          wr_any, wr_go, wf_full, wf_empty, wf_push;
  wr_t           wf_dout;
  logic [IW-1:0] wr_idx;
  always_comb begin
    wr_any = 1'b0;
    wr_sel = '0;
    for (int i = 0; i < NCH; i++) begin
      int c;
      c = (int'(wr_rr) + i) % NCH;
      if (!wr_any && wr_req_valid[c]) begin
        wr_any = 1'b1;
        wr_sel = CW'(c);
      end
    end
  end
  assign wr_idx  = wr_req_key[wr_sel][IW-1:0];
  assign wr_go   = wr_any && !dma_rsp_valid && !init_busy && (wr_req_del[wr_sel] || !wf_full);
  assign wf_push = wr_go && !wr_req_del[wr_sel];
  always_comb begin
    wr_req_ready = '0;
    wr_req_ready[wr_sel] = wr_go;
  end
  sync_fifo #(.T(wr_t), .DEPTH(4)) u_wrfifo (
    .clk, .rst_n, .push(wf_push),
    .din('{addr: host_addr(wr_req_key[wr_sel]), data: wr_req_data[wr_sel]}),
    .full(wf_full), .pop(dma_wr_valid && dma_wr_ready), .dout(wf_dout), .empty(wf_empty),
    .count());
  assign dma_wr_valid = !wf_empty;
  assign dma_wr_addr  = wf_dout.addr;
  assign dma_wr_data  = wf_dout.data;

  // ---------------- state ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_busy   <= 1'b1;
      init_cnt    <= '0;
      s3_valid    <= 1'b0;
      s3_req      <= '0;
      rd_rr       <= '0;
      wr_rr       <= '0;
      out_q       <= '0;
      line_valid  <= '0;
      rob_full    <= '0;
      stat_hits   <= '0;
      stat_misses <= '0;
    end else begin
      if (init_busy) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == rtag_t'(ROB_DEPTH - 1)) init_busy <= 1'b0;
      end
      if (rq_push) rd_rr <= (rd_sel == CW'(NCH - 1)) ? '0 : rd_sel + 1'b1;
      if (wr_go)   wr_rr <= (wr_sel == CW'(NCH - 1)) ? '0 : wr_sel + 1'b1;
      // thread 2
      if (rq_pop)      begin s3_valid <= 1'b1; s3_req <= rq_dout; end
      else if (s3_go)  s3_valid <= 1'b0;
      // thread 3
      if (s3_go) begin
        rob_full[tf_head] <= s3_hit;
        if (s3_hit) stat_hits   <= stat_hits + 1;
        else        stat_misses <= stat_misses + 1;
      end
      // thread 4: DMA response fills its entry
      if (dma_rsp_valid) rob_full[dma_rsp_tag] <= 1'b1;
      if (mq_deq) rob_full[head_tag] <= 1'b0;
      // thread 4 visits the next non-empty queue every clock
      out_q <= next_q(out_q, mq_nonempty);
      // cache line valid bits
      if (fill_en) line_valid[fill_idx] <= 1'b1;
      else if (wr_go) begin
        if (!wr_req_del[wr_sel]) line_valid[wr_idx] <= 1'b1;
        else if (line_tag[wr_idx] == wr_req_key[wr_sel][KEY_W-1:IW]) line_valid[wr_idx] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s3_go) begin
      rob_key[tf_head]  <= s3_req.key;
      rob_chan[tf_head] <= s3_req.chan;
      if (s3_hit) rob_data[tf_head] <= line_data[s3_idx];
    end
    if (dma_rsp_valid) rob_data[dma_rsp_tag] <= dma_rsp_data;
    if (fill_en) begin
      line_data[fill_idx] <= dma_rsp_data;
      line_tag[fill_idx]  <= fill_key[KEY_W-1:IW];
    end else if (wr_go && !wr_req_del[wr_sel]) begin
      line_data[wr_idx] <= wr_req_data[wr_sel];
      line_tag[wr_idx]  <= wr_req_key[wr_sel][KEY_W-1:IW];
    end
  end

  a_rsp_for_waiting_entry: assert property (@(posedge clk) disable iff (!rst_n)
    dma_rsp_valid |-> !rob_full[dma_rsp_tag]) else $error("resource_subsystem: unexpected DMA response tag");
  a_tag_free_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    tf_push |-> !tf_full) else $error("resource_subsystem: tag freed twice");
endmodule
