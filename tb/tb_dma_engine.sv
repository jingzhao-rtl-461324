// tb_dma_engine: three read clients and two write clients against a bus model that
// returns completions of different tags interleaved and out of order. Checks that every
// client gets exactly its bytes, in request order, with the right user field, byte count
// and last flag; that no bus read exceeds 512 bytes; that completions really arrived out
// of order; and that writes reach the bus cut into pieces of at most 512 bytes at the
// right addresses with the right data.
`timescale 1ns/1ps
module tb_dma_engine;
  import jz_pkg::*;
  localparam int NRD = 3, NWR = 2, NT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic [NRD-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  logic [NRD-1:0][63:0] rd_req_addr;
  logic [NRD-1:0][15:0] rd_req_len;
  logic [NRD-1:0][7:0]  rd_req_user;
  beat_t rd_rsp_beat;
  logic [7:0] rd_rsp_user;
  logic [NWR-1:0] wr_valid, wr_ready;
  logic [NWR-1:0][63:0] wr_addr;
  beat_t [NWR-1:0] wr_beat;
  logic bus_rd_valid, bus_rd_ready, bus_cpl_valid, bus_wr_valid, bus_wr_ready;
  logic [63:0] bus_rd_addr, bus_wr_addr;
  logic [15:0] bus_rd_len;
  logic [2:0] bus_rd_tag, bus_cpl_tag;
  logic [511:0] bus_cpl_data;
  beat_t bus_wr_beat;

  dma_engine #(.NRD(NRD), .NWR(NWR), .NTAGS(NT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] mbyte(longint a);
    return 8'(a ^ (a >> 8) ^ (a >> 17) ^ 8'h5A);
  endfunction

  // ---------------- bus model ----------------
  typedef struct { int tag; longint addr; int beats; int sent; } bread_t;
  bread_t pend[$];
  int ooo = 0, last_tag = -1;
  int wbytes_seen[longint];
  assign bus_rd_ready = 1'b1;
  always @(negedge clk) begin
    bus_cpl_valid = 0;
    bus_wr_ready = ($urandom % 4) != 0;
    if (rst_n) begin
      if (bus_rd_valid) begin
        check(bus_rd_len <= 512 && bus_rd_len != 0, "bus read length within 512 bytes");
        pend.push_back('{tag: int'(bus_rd_tag), addr: longint'(bus_rd_addr), beats: (int'(bus_rd_len) + 63) / 64, sent: 0});
      end
      if (pend.size() != 0 && ($urandom % 5) != 0) begin
        int i;
        i = $urandom % pend.size();
        if (i != 0) ooo++;
        bus_cpl_valid = 1;
        bus_cpl_tag = 3'(pend[i].tag);
        for (int b = 0; b < 64; b++) bus_cpl_data[8*b +: 8] = mbyte(pend[i].addr + 64 * pend[i].sent + b);
        if (pend[i].sent + 1 == pend[i].beats) pend.delete(i);
        else pend[i].sent = pend[i].sent + 1;
      end
    end
  end

  // ---------------- read clients ----------------
  typedef struct { longint addr; int len; int user; } rreq_t;
  rreq_t rexp [NRD][$];
  int rgot_bytes [NRD];
  int reads_done = 0;
  always @(negedge clk) begin
    rd_rsp_ready = NRD'($urandom);
    #1;
    for (int c = 0; c < NRD; c++) if (rd_rsp_valid[c] && rd_rsp_ready[c]) begin
      check(rexp[c].size() != 0, "response for an outstanding request");
      if (rexp[c].size() != 0) begin
        int off;
        off = rgot_bytes[c];
        check(rd_rsp_user == 8'(rexp[c][0].user), "user field");
        for (int b = 0; b < int'(rd_rsp_beat.nbytes); b++)
          check(rd_rsp_beat.data[8*b +: 8] == mbyte(rexp[c][0].addr + off + b), "read data byte");
        rgot_bytes[c] += int'(rd_rsp_beat.nbytes);
        check(rd_rsp_beat.last == (rgot_bytes[c] == rexp[c][0].len), "last flag at the end of the request");
        if (rd_rsp_beat.last) begin
          check(rgot_bytes[c] == rexp[c][0].len, "request length");
          void'(rexp[c].pop_front());
          rgot_bytes[c] = 0;
          reads_done++;
        end
      end
    end
  end

  task automatic rclient(input int c, input int n);
    for (int k = 0; k < n; k++) begin
      rreq_t r;
      r.addr = longint'($urandom % 100000) * 64; r.len = 1 + $urandom % 1500; r.user = $urandom % 256;
      rd_req_valid[c] = 1; rd_req_addr[c] = r.addr; rd_req_len[c] = 16'(r.len); rd_req_user[c] = 8'(r.user);
      do begin @(negedge clk); #2; end while (!rd_req_ready[c]);
      rexp[c].push_back(r);
      @(posedge clk); #1;
      rd_req_valid[c] = 0;
      repeat ($urandom % 5) @(posedge clk);
      #1;
    end
  endtask

  // ---------------- write clients ----------------
  // every written byte is a function of its address; the bus checks it
  int wpkts_done = 0, wbeats_expected = 0, wbeats_seen = 0;
  longint cur_tlp_addr; int cur_tlp_beats = 0; int cur_tlp_off = 0;
  always @(negedge clk) begin
    #1;
    if (rst_n && bus_wr_valid && bus_wr_ready) begin
      if (cur_tlp_beats == 0) begin
        cur_tlp_addr = longint'(bus_wr_addr);
        check(cur_tlp_addr % 64 == 0, "write address aligned");
      end else check(longint'(bus_wr_addr) == cur_tlp_addr, "address constant within a bus write");
      for (int b = 0; b < int'(bus_wr_beat.nbytes); b++)
        check(bus_wr_beat.data[8*b +: 8] == ~mbyte(cur_tlp_addr + 64 * cur_tlp_beats + b), "write data byte");
      cur_tlp_beats++;
      wbeats_seen++;
      check(cur_tlp_beats <= 8, "bus write within 512 bytes");
      if (bus_wr_beat.last) cur_tlp_beats = 0;
    end
  end
  task automatic wclient(input int c, input int n);
    for (int k = 0; k < n; k++) begin
      longint a; int len, nb;
      a = longint'($urandom % 100000) * 64; len = 1 + $urandom % 1500; nb = (len + 63) / 64;
      wbeats_expected += nb;
      for (int i = 0; i < nb; i++) begin
        wr_valid[c] = 1; wr_addr[c] = a;
        wr_beat[c].nbytes = (i == nb - 1) ? NBYTES_W'(len - 64 * i) : NBYTES_W'(64);
        wr_beat[c].last = (i == nb - 1);
        for (int b = 0; b < 64; b++) wr_beat[c].data[8*b +: 8] = ~mbyte(a + 64 * i + b);
        do begin @(negedge clk); #2; end while (!wr_ready[c]);
        @(posedge clk); #1;
      end
      wr_valid[c] = 0;
      wpkts_done++;
    end
  endtask

  initial begin
    rd_req_valid = 0; rd_req_addr = '0; rd_req_len = '0; rd_req_user = '0;
    wr_valid = 0; wr_addr = '0; wr_beat = '0; bus_cpl_tag = 0; bus_cpl_data = 0;
    foreach (rgot_bytes[c]) rgot_bytes[c] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (NT + 3) @(posedge clk); #1;
    fork
      rclient(0, 60); rclient(1, 60); rclient(2, 60);
      wclient(0, 40); wclient(1, 40);
    join
    while (reads_done < 180) @(posedge clk);
    repeat (10) @(posedge clk);
    check(wbeats_seen == wbeats_expected, "every write beat reached the bus");
    check(ooo > 100, $sformatf("completions out of order: %0d", ooo));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
