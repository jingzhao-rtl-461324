// tb_dynamic_buffer: inserts random packets of 1..6 beats into dynamic_buffer while
// reading, read-and-freeing and freeing stored packets in random order. Every emitted
// beat is compared with the packet as inserted, and free_count with the number of slots
// the model says are in use. Also checks that a full buffer stalls an insertion.
`timescale 1ns/1ps
module tb_dynamic_buffer;
  localparam int DW = 32, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins_valid, ins_ready, ins_last, ins_done;
  logic [DW-1:0] ins_data;
  logic [4:0] ins_handle, cmd_handle;
  logic cmd_valid, cmd_ready, cmd_emit, cmd_release, cmd_done;
  logic out_valid, out_ready, out_last;
  logic [DW-1:0] out_data;
  logic [5:0] free_count;
  int checks = 0, failures = 0;
  int used = 0;
  typedef logic [DW-1:0] pkt_t [$];
  pkt_t stored [int];       // handle -> beats

  dynamic_buffer #(.DATA_W(DW), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic insert(input int n);
    pkt_t p;
    for (int i = 0; i < n; i++) begin
      ins_valid = 1; ins_data = DW'($urandom); ins_last = (i == n - 1);
      p.push_back(ins_data);
      while (!ins_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
    end
    ins_valid = 0;
    while (!ins_done) begin @(posedge clk); #1; end
    check(!stored.exists(ins_handle), "handle is not in use");
    stored[ins_handle] = p;
    used += n;
  endtask

  task automatic walk(input int h, input bit emit, input bit rel);
    pkt_t p = stored[h];
    int k = 0;
    cmd_valid = 1; cmd_handle = 5'(h); cmd_emit = emit; cmd_release = rel;
    @(posedge clk); #1;
    cmd_valid = 0;
    while (!cmd_done) begin
      out_ready = ($urandom % 4) != 0;
      #1;
      if (emit && out_valid && out_ready) begin
        check(k < p.size() && out_data == p[k], $sformatf("beat %0d of handle %0d", k, h));
        check(out_last == (k == p.size() - 1), $sformatf("out_last k=%0d size=%0d h=%0d", k, p.size(), h));
        k++;
      end
      check(!(out_valid && !emit), "no beats when not emitting");
      @(posedge clk); #1;
    end
    if (emit) check(k == p.size(), "all beats emitted");
    if (rel) begin used -= p.size(); stored.delete(h); end
  endtask

  initial begin
    ins_valid = 0; ins_last = 0; ins_data = 0; cmd_valid = 0; cmd_handle = 0;
    cmd_emit = 0; cmd_release = 0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (DEPTH + 2) @(posedge clk); #1;
    check(free_count == DEPTH, "all free after reset");
    for (int it = 0; it < 3000; it++) begin
      int r = $urandom % 4;
      if (r < 2 && used <= DEPTH - 6) insert(1 + $urandom % 6);
      else if (stored.num() != 0) begin
        int keys[$]; int h;
        keys.delete();
        foreach (stored[k]) keys.push_back(k);
        h = keys[$urandom % keys.size()];
        case ($urandom % 3)
          0: walk(h, 1, 0);
          1: walk(h, 1, 1);
          default: walk(h, 0, 1);
        endcase
      end
      @(posedge clk); #1;
      check(free_count == DEPTH - used, $sformatf("free_count %0d vs %0d", free_count, DEPTH - used));
    end
    // fill completely, then one more beat must stall
    while (used <= DEPTH - 6) insert(6);
    if (used < DEPTH) insert(DEPTH - used);
    ins_valid = 1; ins_data = 1; ins_last = 1; #1;
    check(!ins_ready, "full buffer stalls insertion");
    ins_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
