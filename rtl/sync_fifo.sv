// sync_fifo: single-clock first-in first-out queue used as glue inside the NIC blocks.
//
// DEPTH entries of a parameterised type T held in a register array. Write when
// push && !full, read the head (dout) and drop it when pop && !empty; push and pop may
// happen in the same cycle, also when full (the pop frees the place). Reset empties it.
// The data is shown combinationally from the head (first-word fall-through). This is a
// helper of this design; the paper names FIFOs (ReqFIFO, ReqHitFIFO) without their insides.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  output logic full,
  input  logic pop,
  output T     dout,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  // A write into a full FIFO that is not popped in the same cycle is lost.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sync_fifo overflow");
endmodule
