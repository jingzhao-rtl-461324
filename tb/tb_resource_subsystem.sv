// tb_resource_subsystem: drives resource_subsystem (small configuration) from two channels
// against a host-memory model whose DMA responses come back after random delays and out
// of order. Checks:
//  * every response carries the host value of its key, and responses of one connection
//    come back in request order;
//  * a hit returns 3 clocks after its request is taken;
//  * non-blocking: with one connection's miss held at the host, hits of another
//    connection still return (no head-of-line blocking);
//  * CacheModify: a write is seen by later reads and written through to the host; a delete
//    makes the next read miss.
`timescale 1ns/1ps
module tb_resource_subsystem;
  import jz_pkg::*;
  localparam int EW = 64, DEPTH = 16, KW = 8, CONNW = 4, NCH = 2, NQ = 4, ROB = 16;
  localparam int EB = 8;
  localparam logic [63:0] BASE = 64'h1000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic [NCH-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  logic [NCH-1:0][KW-1:0] rd_req_key, wr_req_key;
  logic [NCH-1:0][CONNW-1:0] rd_req_conn;
  logic [EW-1:0] rd_rsp_data;
  logic [KW-1:0] rd_rsp_key;
  logic [NCH-1:0] wr_req_valid, wr_req_ready, wr_req_del;
  logic [NCH-1:0][EW-1:0] wr_req_data;
  logic dma_rd_valid, dma_rd_ready, dma_rsp_valid, dma_wr_valid, dma_wr_ready;
  logic [63:0] dma_rd_addr, dma_wr_addr, icm_base;
  logic [3:0] dma_rd_tag, dma_rsp_tag;
  logic [EW-1:0] dma_rsp_data, dma_wr_data;
  logic [31:0] stat_hits, stat_misses;

  resource_subsystem #(.ENTRY_W(EW), .DEPTH(DEPTH), .KEY_W(KW), .CONN_W(CONNW), .NCH(NCH),
                       .NCONNQ(NQ), .ROB_DEPTH(ROB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host memory model ----------------
  logic [EW-1:0] hostmem [int];
  function automatic logic [EW-1:0] hval(int key);
    if (hostmem.exists(key)) return hostmem[key];
    return {32'hC0DE_0000 | 32'(key), 32'(key) * 32'h9E37_79B9};
  endfunction
  typedef struct { int tag; int key; int t_ready; } pend_t;
  pend_t pend[$];
  bit dma_hold_key_en = 0; int dma_hold_key = -1;
  int dma_reads = 0, dma_writes = 0;
  assign dma_rd_ready = 1'b1;
  assign dma_wr_ready = 1'b1;
  assign icm_base = BASE;

  always @(negedge clk) begin
    dma_rsp_valid = 0;
    if (rst_n) begin
      if (dma_rd_valid) begin
        pend.push_back('{tag: int'(dma_rd_tag), key: int'((dma_rd_addr - BASE) / EB), t_ready: cyc + 2 + int'($urandom % 20)});
        dma_reads++;
      end
      if (dma_wr_valid) begin
        check(((dma_wr_addr - BASE) % EB) == 0, "write address aligned");
        hostmem[int'((dma_wr_addr - BASE) / EB)] = dma_wr_data;
        dma_writes++;
      end
      // return one ready response, picked at random (out of order)
      if (pend.size() != 0) begin
        int i;
        i = $urandom % pend.size();
        if (cyc >= pend[i].t_ready && !(dma_hold_key_en && pend[i].key == dma_hold_key)) begin
          dma_rsp_valid = 1; dma_rsp_tag = 4'(pend[i].tag); dma_rsp_data = hval(pend[i].key);
          pend.delete(i);
        end
      end
    end
  end

  // ---------------- expected responses per connection ----------------
  typedef struct { int key; logic [EW-1:0] data; int t; } exp_t;
  exp_t expq [1 << CONNW][$];
  int got = 0, issued = 0;
  int last_rsp_key = -1; int last_rsp_cyc = 0; int rsp_order[$];

  always @(negedge clk) begin
    rd_rsp_ready = {($urandom % 4 != 0), ($urandom % 4 != 0)};
    #1;
    for (int c = 0; c < NCH; c++) if (rd_rsp_valid[c] && rd_rsp_ready[c]) begin
      // find the connection whose oldest outstanding read has this key
      bit found;
      found = 0;
      for (int q = 0; q < (1 << CONNW) && !found; q++)
        if ((q % NCH) == c && expq[q].size() != 0 && expq[q][0].key == int'(rd_rsp_key)) begin
          found = 1;
          check(rd_rsp_data == expq[q][0].data, $sformatf("data of key %0d", rd_rsp_key));
          last_rsp_cyc = cyc + 1 - expq[q][0].t;
          void'(expq[q].pop_front());
        end
      check(found, $sformatf("response key %0d is the oldest of a connection of channel %0d", rd_rsp_key, c));
      last_rsp_key = int'(rd_rsp_key);
      rsp_order.push_back(int'(rd_rsp_key));
      got++;
    end
  end

  // issue one read on channel (conn % NCH); waits until taken
  task automatic rd(input int key, input int conn);
    int c = conn % NCH;
    rd_req_valid[c] = 1; rd_req_key[c] = KW'(key); rd_req_conn[c] = CONNW'(conn);
    do begin @(negedge clk); #2; end while (!rd_req_ready[c]);
    expq[conn].push_back('{key: key, data: hval(key), t: cyc + 1});
    issued++;
    @(posedge clk); #1;
    rd_req_valid[c] = 0;
  endtask
  task automatic wr(input int key, input bit del, input logic [EW-1:0] d);
    wr_req_valid[0] = 1; wr_req_key[0] = KW'(key); wr_req_del[0] = del; wr_req_data[0] = d;
    do begin @(negedge clk); #2; end while (!wr_req_ready[0]);
    @(posedge clk); #1;
    wr_req_valid[0] = 0;
  endtask
  task automatic drain();
    while (got != issued) @(posedge clk);
    repeat (5) @(posedge clk); #1;
  endtask

  initial begin
    int h0, m0;
    rd_req_valid = 0; rd_req_key = '0; rd_req_conn = '0; wr_req_valid = 0; wr_req_key = '0;
    wr_req_del = '0; wr_req_data = '0; dma_rsp_valid = 0; dma_rsp_tag = 0; dma_rsp_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (ROB + 3) @(posedge clk); #1;

    // 1. random reads from both channels, keys from a set larger than the cache
    fork
      for (int i = 0; i < 600; i++) begin int cn = 2 * ($urandom % 8);     rd($urandom % 40, cn); end
      for (int i = 0; i < 600; i++) begin int cn = 2 * ($urandom % 8) + 1; rd($urandom % 40, cn); end
    join
    drain();
    check(stat_hits + stat_misses == 1200, "every read looked up once");
    check(stat_hits > 0 && stat_misses > 0, "both hits and misses happened");
    check(dma_reads == int'(stat_misses), "one DMA read per miss");

    // 2. hit latency: key 3 is cached after a first read
    rd(3, 0); drain();
    rd(3, 0); drain();
    check(last_rsp_cyc == 3, $sformatf("hit latency %0d clocks", last_rsp_cyc));

    // 3. no head-of-line blocking: miss of connection 2 held, hits of connection 4 pass
    rd(5, 4); rd(6, 4); drain();                 // cache keys 5 and 6
    dma_hold_key_en = 1; dma_hold_key = 37;
    wr(37, 1, '0);                               // make sure key 37 misses
    rsp_order.delete();
    rd(37, 2); rd(5, 4); rd(6, 4); rd(5, 2);
    repeat (30) @(posedge clk); #1;
    check(rsp_order.size() == 2 && rsp_order[0] == 5 && rsp_order[1] == 6,
          "hits of another connection returned while a miss is outstanding");
    dma_hold_key_en = 0;
    drain();
    check(rsp_order.size() == 4 && rsp_order[2] == 37 && rsp_order[3] == 5,
          "the miss and the read behind it in its connection return in order");

    // 4. CacheModify: write, read back (hit), check write-through, delete -> miss
    wr(9, 0, 64'h0123_4567_89AB_CDEF);
    repeat (3) @(posedge clk); #1;
    check(hostmem.exists(9) && hostmem[9] == 64'h0123_4567_89AB_CDEF, "write-through to host");
    h0 = int'(stat_hits);
    rd(9, 1); drain();
    check(int'(stat_hits) == h0 + 1, "read after write hits");
    wr(9, 1, '0);
    m0 = int'(stat_misses);
    rd(9, 1); drain();
    check(int'(stat_misses) == m0 + 1, "read after delete misses");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
