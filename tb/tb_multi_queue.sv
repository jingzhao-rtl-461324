// tb_multi_queue: random enqueue/dequeue traffic on multi_queue, checked against one
// SystemVerilog queue per logical queue. Also checks the total capacity (DEPTH entries
// shared by all queues) and that a full buffer refuses an enqueue.
`timescale 1ns/1ps
module tb_multi_queue;
  localparam int DW = 16, DEPTH = 32, NQ = 8;
  logic clk = 0, rst_n = 0;
  always #50 clk = ~clk;
  logic enq_valid, enq_ready, deq_valid, peek_valid;
  logic [2:0] enq_qid, peek_qid, deq_qid;
  logic [DW-1:0] enq_data, peek_data;
  logic [NQ-1:0] nonempty;
  logic [5:0] free_count;
  int checks = 0, failures = 0;
  logic [DW-1:0] model [NQ][$];

  multi_queue #(.DATA_W(DW), .DEPTH(DEPTH), .NQ(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    enq_valid = 0; deq_valid = 0; enq_qid = 0; deq_qid = 0; peek_qid = 0; enq_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(free_count == DEPTH, "all slots free after reset");
    // fill the whole buffer through one queue, then check it refuses more
    for (int i = 0; i < DEPTH; i++) begin
      enq_valid = 1; enq_qid = 3; enq_data = DW'(i * 7 + 1);
      check(enq_ready, "enq_ready while space left");
      model[3].push_back(enq_data);
      @(negedge clk);
    end
    check(!enq_ready, "full buffer refuses enqueue");
    enq_valid = 0;
    // random traffic
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int q;
      // check every queue's head and empty flag
      for (int k = 0; k < NQ; k++) begin
        peek_qid = 3'(k); #1;
        check(peek_valid == (model[k].size() != 0), "peek_valid matches model");
        if (model[k].size() != 0) check(peek_data == model[k][0], $sformatf("head of queue %0d", k));
        check(nonempty[k] == (model[k].size() != 0), "nonempty bit");
      end
      total = 0;
      for (int k = 0; k < NQ; k++) total += model[k].size();
      check(free_count == DEPTH - total, "free_count");
      enq_valid = ($urandom % 3) != 0; enq_qid = 3'($urandom % NQ); enq_data = DW'($urandom);
      q = $urandom % NQ;
      // bias the dequeue toward a non-empty queue; sometimes pick the enqueued one
      if (($urandom % 4) == 0) q = enq_qid;
      deq_qid = 3'(q);
      deq_valid = (model[q].size() != 0) && (($urandom % 3) != 0);
      #1;
      if (deq_valid) void'(model[q].pop_front());
      if (enq_valid && enq_ready) model[enq_qid].push_back(enq_data);
      @(negedge clk);
    end
    enq_valid = 0; deq_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
