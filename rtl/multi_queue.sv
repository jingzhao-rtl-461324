// multi_queue: many logical FIFOs that share one buffer (Dynamic Enqueue/Dequeue).
//
// A metadata table keeps, per logical queue, the slot of its head, the slot of its tail
// and an empty flag. The shared buffer keeps, per slot, the data and the slot of the
// next element of the same queue. A free list (a FIFO of slot numbers) hands out a slot
// on every enqueue and takes it back on every dequeue, so queue lengths are limited only
// by the total DEPTH. This table/buffer/free-list arrangement is the paper's; the
// single-cycle timing, the peek port and the free-list FIFO are this design's choices.
//
// Interface and timing:
//  * enq_valid with enq_qid/enq_data appends to that queue at the clock edge when
//    enq_ready (a free slot exists).
//  * peek_qid selects a queue; peek_valid/peek_data show its head combinationally.
//  * deq_valid with deq_qid drops the head of that queue at the clock edge (it must be
//    non-empty). An enqueue and a dequeue may be made in the same cycle, also on the
//    same queue.
//  * nonempty has one bit per queue.
module multi_queue #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned NQ     = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      enq_valid,
  input  logic [$clog2(NQ)-1:0]     enq_qid,
  input  logic [DATA_W-1:0]         enq_data,
  output logic                      enq_ready,
  input  logic [$clog2(NQ)-1:0]     peek_qid,
  output logic                      peek_valid,
  output logic [DATA_W-1:0]         peek_data,
  input  logic                      deq_valid,
  input  logic [$clog2(NQ)-1:0]     deq_qid,
  output logic [NQ-1:0]             nonempty,
  output logic [$clog2(DEPTH+1)-1:0] free_count
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW-1:0] slot_t;

  // metadata table
  slot_t       head [NQ];
  slot_t       tail [NQ];
  logic [NQ-1:0] empty_q;
  // shared buffer
  logic [DATA_W-1:0] buf_data [DEPTH];
  slot_t             buf_next [DEPTH];

  // free list
  logic  fl_empty, fl_full;
  slot_t fl_head;
  logic  do_enq, do_deq;
  slot_t deq_slot;
  logic  init_busy;
  slot_t init_cnt;

  assign enq_ready  = !fl_empty && !init_busy;
  assign do_enq     = enq_valid && enq_ready;
  assign do_deq     = deq_valid && !empty_q[deq_qid];
  assign deq_slot   = head[deq_qid];
  assign nonempty   = ~empty_q;
  assign peek_valid = !empty_q[peek_qid];
  assign peek_data  = buf_data[head[peek_qid]];

  // The free list is filled with every slot number in the DEPTH cycles after reset.
  sync_fifo #(.T(slot_t), .DEPTH(DEPTH)) u_free (
    .clk, .rst_n,
    .push (init_busy || do_deq),
    .din  (init_busy ? init_cnt : deq_slot),
    .full (fl_full),
    .pop  (do_enq),
    .dout (fl_head),
    .empty(fl_empty),
    .count(free_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_cnt  <= '0;
      empty_q   <= '1;
      for (int q = 0; q < NQ; q++) begin
        head[q] <= '0;
        tail[q] <= '0;
      end
    end else begin
      if (init_busy) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == slot_t'(DEPTH - 1)) init_busy <= 1'b0;
      end
      // dequeue: advance the head or mark the queue empty
      if (do_deq) begin
        if (head[deq_qid] == tail[deq_qid]) empty_q[deq_qid] <= 1'b1;
        else                                head[deq_qid]    <= buf_next[head[deq_qid]];
      end
      // enqueue: link behind the tail, or start the queue
      if (do_enq) begin
        tail[enq_qid] <= fl_head;
        if (empty_q[enq_qid] ||
            (do_deq && deq_qid == enq_qid && head[deq_qid] == tail[deq_qid])) begin
          head[enq_qid]    <= fl_head;
          empty_q[enq_qid] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_enq) begin
      buf_data[fl_head] <= enq_data;
      if (!empty_q[enq_qid]) buf_next[tail[enq_qid]] <= fl_head;
    end
  end

  a_deq_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    deq_valid |-> !empty_q[deq_qid]) else $error("multi_queue: dequeue from empty queue");
  a_fl_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (init_busy || do_deq) |-> !fl_full || do_enq) else $error("multi_queue: free list overflow");
endmodule
