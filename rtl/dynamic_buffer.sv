// dynamic_buffer: a shared packet buffer with malloc/free semantics (Dynamic Insert/Delete).
//
// A packet of one or more beats is inserted into free slots taken from a free list; the
// slots of one packet are chained by a next pointer, and the number of the first slot is
// returned as the packet's handle. Later a command on a handle walks the chain and
//   * emits the beats (read, e.g. for a retransmission),
//   * releases the slots back to the free list (delete), or
//   * both (read once and free, e.g. for an in-order commit).
// The paper gives only the function ("allocate and deallocate space in a shared buffer")
// and the size (32 entries of 512 bits); the linked-slot organisation mirrors its
// MultiQueue and is this design's choice.
//
// Interface and timing:
//  * ins_valid/ins_ready/ins_data/ins_last: one beat per cycle; a slot is taken per
//    beat. ins_done pulses with ins_handle in the cycle after the last beat is taken.
//    ins_ready is low when no slot is free (the insertion then waits).
//  * cmd_valid/cmd_ready with cmd_handle, cmd_emit, cmd_release: accepted when the
//    walker is idle; it then visits one slot per cycle (per out_ready beat if emitting)
//    and raises cmd_done in the cycle it finishes.
//  * free_count: number of free slots.
module dynamic_buffer #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned DEPTH  = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // insert
  input  logic                       ins_valid,
  output logic                       ins_ready,
  input  logic [DATA_W-1:0]          ins_data,
  input  logic                       ins_last,
  output logic                       ins_done,
  output logic [$clog2(DEPTH)-1:0]   ins_handle,
  // walk (read / delete)
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  logic [$clog2(DEPTH)-1:0]   cmd_handle,
  input  logic                       cmd_emit,
  input  logic                       cmd_release,
  output logic                       cmd_done,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [DATA_W-1:0]          out_data,
  output logic                       out_last,
  output logic [$clog2(DEPTH+1)-1:0] free_count
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW-1:0] slot_t;

  logic [DATA_W-1:0] mem_data [DEPTH];
  slot_t             mem_next [DEPTH];
  logic              mem_last [DEPTH];

  // free list
  logic  fl_empty, fl_full, fl_push, fl_pop;
  slot_t fl_head, fl_din;
  logic  init_busy;
  slot_t init_cnt;

  // insert state
  logic  ins_mid;        // inside a packet
  slot_t ins_prev;       // slot of the previous beat of this packet
  slot_t ins_first;

  // walker state
  logic  w_busy, w_emit, w_release;
  slot_t w_slot;
  logic  w_step;

  assign ins_ready = !fl_empty && !init_busy;
  assign fl_pop    = ins_valid && ins_ready;

  assign cmd_ready = !w_busy && !init_busy;
  assign out_valid = w_busy && w_emit;
  assign out_data  = mem_data[w_slot];
  assign out_last  = mem_last[w_slot];
  assign w_step    = w_busy && (!w_emit || out_ready);

  assign fl_push = init_busy || (w_step && w_release);
  assign fl_din  = init_busy ? init_cnt : w_slot;

  sync_fifo #(.T(slot_t), .DEPTH(DEPTH)) u_free (
    .clk, .rst_n,
    .push (fl_push), .din(fl_din), .full(fl_full),
    .pop  (fl_pop),  .dout(fl_head), .empty(fl_empty),
    .count(free_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_busy  <= 1'b1;
      init_cnt   <= '0;
      ins_mid    <= 1'b0;
      ins_prev   <= '0;
      ins_first  <= '0;
      ins_done   <= 1'b0;
      ins_handle <= '0;
      w_busy     <= 1'b0;
      w_emit     <= 1'b0;
      w_release  <= 1'b0;
      w_slot     <= '0;
      cmd_done   <= 1'b0;
    end else begin
      ins_done <= 1'b0;
      cmd_done <= 1'b0;
      if (init_busy) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == slot_t'(DEPTH - 1)) init_busy <= 1'b0;
      end
      if (fl_pop) begin
        ins_prev <= fl_head;
        if (!ins_mid) ins_first <= fl_head;
        ins_mid <= !ins_last;
        if (ins_last) begin
          ins_done   <= 1'b1;
          ins_handle <= ins_mid ? ins_first : fl_head;
        end
      end
      if (cmd_valid && cmd_ready) begin
        w_busy    <= 1'b1;
        w_slot    <= cmd_handle;
        w_emit    <= cmd_emit;
        w_release <= cmd_release;
      end else if (w_step) begin
        if (mem_last[w_slot]) begin
          w_busy   <= 1'b0;
          cmd_done <= 1'b1;
        end else begin
          w_slot <= mem_next[w_slot];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fl_pop) begin
      mem_data[fl_head] <= ins_data;
      mem_last[fl_head] <= ins_last;
      if (ins_mid) mem_next[ins_prev] <= fl_head;
    end
  end

  a_fl_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    fl_push |-> (!fl_full || fl_pop)) else $error("dynamic_buffer: slot released twice");
endmodule
