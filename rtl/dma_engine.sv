// dma_engine: plain memory read/write for the NIC blocks on top of a PCIe-style
// request/completion bus.
//
// Reads: NRD clients ask for (addr, len, user). The engine takes one request at a time,
// round-robin, and cuts it into bus read requests of at most MRRS bytes, each under its
// own tag. The bus may return the completions of different tags in any order (the beats of
// one tag in order). Every tag owns MRRS/64 entries of a reorder buffer of NTAGS*MRRS/64
// beats (512 x 512 bits by default); an issue-order queue of tags returns the data to
// the client in request order, a beat as soon as it and all before it have arrived. The
// client sees a stream of beats whose last beat has `last` set and its byte count in
// nbytes, with its user field.
// Writes: NWR clients send a packet of beats with the start address on their first beat;
// the engine forwards one client's packet at a time and cuts it into bus writes of at
// most MPS bytes, with the address advanced for each.
//
// The paper gives the function (memory read/write semantics that hide payload splitting
// and out-of-order completions), Max Read Request Size and Max Payload Size of 512 bytes
// and the 512 x 512 completion reorder buffer. The tag scheme, the bus signal set, 64-byte
// aligned addresses and the one-request-at-a-time splitter are this design's choices.
// Timing: a bus read request per clock while tags are free; returned data follows a
// completion by one clock.
module dma_engine
  import jz_pkg::*;
#(
  parameter int unsigned NRD    = 6,
  parameter int unsigned NWR    = 4,
  parameter int unsigned MRRS   = 512,
  parameter int unsigned MPS    = 512,
  parameter int unsigned NTAGS  = 64,
  parameter int unsigned USER_W = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // read clients
  input  logic [NRD-1:0]                 rd_req_valid,
  output logic [NRD-1:0]                 rd_req_ready,
  input  logic [NRD-1:0][ADDR_W-1:0]     rd_req_addr,
  input  logic [NRD-1:0][LEN_W-1:0]      rd_req_len,
  input  logic [NRD-1:0][USER_W-1:0]     rd_req_user,
  output logic [NRD-1:0]                 rd_rsp_valid,
  input  logic [NRD-1:0]                 rd_rsp_ready,
  output beat_t                          rd_rsp_beat,
  output logic [USER_W-1:0]              rd_rsp_user,
  // write clients
  input  logic [NWR-1:0]                 wr_valid,
  output logic [NWR-1:0]                 wr_ready,
  input  logic [NWR-1:0][ADDR_W-1:0]     wr_addr,     // valid with the first beat
  input  beat_t [NWR-1:0]                wr_beat,
  // bus side: read requests and completions
  output logic                           bus_rd_valid,
  input  logic                           bus_rd_ready,
  output logic [ADDR_W-1:0]              bus_rd_addr,
  output logic [LEN_W-1:0]               bus_rd_len,
  output logic [$clog2(NTAGS)-1:0]       bus_rd_tag,
  input  logic                           bus_cpl_valid,
  input  logic [$clog2(NTAGS)-1:0]       bus_cpl_tag,
  input  logic [DATA_W-1:0]              bus_cpl_data,
  // bus side: writes
  output logic                           bus_wr_valid,
  input  logic                           bus_wr_ready,
  output logic [ADDR_W-1:0]              bus_wr_addr,
  output beat_t                          bus_wr_beat   // last = end of this bus write
);
  localparam int unsigned TW   = $clog2(NTAGS);
  localparam int unsigned BPT  = MRRS / BEAT_B;        // beats per tag
  localparam int unsigned BW   = $clog2(BPT);
  localparam int unsigned ROBN = NTAGS * BPT;          // reorder buffer beats
  localparam int unsigned RCW  = (NRD > 1) ? $clog2(NRD) : 1;
  localparam int unsigned WCW  = (NWR > 1) ? $clog2(NWR) : 1;

  typedef logic [TW-1:0] tag_t;
  typedef struct packed {
    logic [RCW-1:0]    client;
    logic [USER_W-1:0] user;
    logic [BW:0]       nbeats;     // beats of this bus read
    logic [NBYTES_W-1:0] tail_bytes; // bytes of its last beat
    logic              last_sub;   // last bus read of the client request
  } taginfo_t;

  // ---------------- read splitter ----------------
  logic              sp_busy;
  logic [RCW-1:0]    sp_client;
  logic [USER_W-1:0] sp_user;
  logic [ADDR_W-1:0] sp_addr;
  logic [LEN_W-1:0]  sp_left;
  logic [RCW-1:0]    rd_rr, rd_sel;
  logic              rd_any;
  always_comb begin
    rd_any = 1'b0;
    rd_sel = '0;
    for (int i = 0; i < NRD; i++) begin
      int c;
      c = (int'(rd_rr) + i) % NRD;
      if (!rd_any && rd_req_valid[c]) begin
        rd_any = 1'b1;
        rd_sel = RCW'(c);
      end
    end
  end
  always_comb begin
    rd_req_ready = '0;
    rd_req_ready[rd_sel] = rd_any && !sp_busy;
  end

  logic tf_empty, tf_full, tf_pop, tf_push;
  tag_t tf_head, tf_din;
  logic oq_full, oq_empty, oq_pop;
  tag_t oq_head;
  logic init_busy;
  tag_t init_cnt;
  logic [LEN_W-1:0] sub_len;

  assign sub_len      = (sp_left > LEN_W'(MRRS)) ? LEN_W'(MRRS) : sp_left;
  assign bus_rd_valid = sp_busy && !tf_empty && !oq_full && !init_busy;
  assign bus_rd_addr  = sp_addr;
  assign bus_rd_len   = sub_len;
  assign bus_rd_tag   = tf_head;
  assign tf_pop       = bus_rd_valid && bus_rd_ready;

  taginfo_t          info [NTAGS];
  logic [BW:0]       arrived [NTAGS];   // beats of the tag received so far
  logic [DATA_W-1:0] rob [ROBN];

  sync_fifo #(.T(tag_t), .DEPTH(NTAGS)) u_tagfree (
    .clk, .rst_n, .push(tf_push), .din(tf_din), .full(tf_full),
    .pop(tf_pop), .dout(tf_head), .empty(tf_empty), .count());
  sync_fifo #(.T(tag_t), .DEPTH(NTAGS)) u_order (
    .clk, .rst_n, .push(tf_pop), .din(tf_head), .full(oq_full),
    .pop(oq_pop), .dout(oq_head), .empty(oq_empty), .count());

  // ---------------- return in order ----------------
  logic [BW:0] out_k;        // next beat of the head tag to return
  taginfo_t    hinfo;
  logic        out_valid, out_fire, out_lastbeat;
  assign hinfo        = info[oq_head];
  assign out_valid    = !oq_empty && (out_k < arrived[oq_head]);
  assign out_lastbeat = (out_k == hinfo.nbeats - 1'b1);
  assign out_fire     = out_valid && rd_rsp_ready[hinfo.client];
  assign oq_pop       = out_fire && out_lastbeat;
  assign tf_push      = init_busy || oq_pop;
  assign tf_din       = init_busy ? init_cnt : oq_head;

  always_comb begin
    rd_rsp_valid = '0;
    rd_rsp_valid[hinfo.client] = out_valid;
    rd_rsp_beat.data   = rob[{oq_head, out_k[BW-1:0]}];
    rd_rsp_beat.last   = out_lastbeat && hinfo.last_sub;
    rd_rsp_beat.nbytes = out_lastbeat ? hinfo.tail_bytes : NBYTES_W'(BEAT_B);
    rd_rsp_user        = hinfo.user;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sp_busy   <= 1'b0;
      sp_client <= '0;
      sp_user   <= '0;
      sp_addr   <= '0;
      sp_left   <= '0;
      rd_rr     <= '0;
      out_k     <= '0;
      init_busy <= 1'b1;
      init_cnt  <= '0;
      for (int t = 0; t < NTAGS; t++) arrived[t] <= '0;
    end else begin
      if (init_busy) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == tag_t'(NTAGS - 1)) init_busy <= 1'b0;
      end
      if (!sp_busy && rd_any) begin
        sp_busy   <= 1'b1;
        sp_client <= rd_sel;
        sp_user   <= rd_req_user[rd_sel];
        sp_addr   <= rd_req_addr[rd_sel];
        sp_left   <= rd_req_len[rd_sel];
        rd_rr     <= (rd_sel == RCW'(NRD - 1)) ? '0 : rd_sel + 1'b1;
      end else if (tf_pop) begin
        sp_addr <= sp_addr + ADDR_W'(sub_len);
        sp_left <= sp_left - sub_len;
        if (sp_left == sub_len) sp_busy <= 1'b0;
      end
      if (bus_cpl_valid) arrived[bus_cpl_tag] <= arrived[bus_cpl_tag] + 1'b1;
      if (out_fire) begin
        out_k <= out_lastbeat ? '0 : out_k + 1'b1;
        if (out_lastbeat) arrived[oq_head] <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (tf_pop) begin
      info[tf_head].client     <= sp_client;
      info[tf_head].user       <= sp_user;
      info[tf_head].nbeats     <= (BW+1)'((sub_len + LEN_W'(BEAT_B - 1)) / LEN_W'(BEAT_B));
      info[tf_head].tail_bytes <= NBYTES_W'(((sub_len - 1'b1) % LEN_W'(BEAT_B)) + 1'b1);
      info[tf_head].last_sub   <= (sp_left == sub_len);
    end
    if (bus_cpl_valid) rob[{bus_cpl_tag, arrived[bus_cpl_tag][BW-1:0]}] <= bus_cpl_data;
  end

  // ---------------- write path ----------------
  logic              w_busy;
  logic [WCW-1:0]    w_client, wr_rr, w_sel;
  logic              w_any;
  logic [ADDR_W-1:0] w_addr;
  logic [BW-1:0]     w_k;              // beat within the current bus write
  localparam int unsigned WBPT = MPS / BEAT_B;
  always_comb begin
    w_any = 1'b0;
    w_sel = '0;
    for (int i = 0; i < NWR; i++) begin
      int c;
      c = (int'(wr_rr) + i) % NWR;
      if (!w_any && wr_valid[c]) begin
        w_any = 1'b1;
        w_sel = WCW'(c);
      end
    end
  end
  logic [WCW-1:0] w_cur;
  assign w_cur        = w_busy ? w_client : w_sel;
  assign bus_wr_valid = w_busy ? wr_valid[w_client] : w_any;
  assign bus_wr_addr  = w_busy ? w_addr : wr_addr[w_sel];
  always_comb begin
    bus_wr_beat      = wr_beat[w_cur];
    bus_wr_beat.last = wr_beat[w_cur].last || (int'(w_k) == WBPT - 1);
    wr_ready         = '0;
    wr_ready[w_cur]  = bus_wr_ready;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_busy   <= 1'b0;
      w_client <= '0;
      w_addr   <= '0;
      w_k      <= '0;
      wr_rr    <= '0;
    end else if (bus_wr_valid && bus_wr_ready) begin
      if (wr_beat[w_cur].last) begin
        w_busy <= 1'b0;
        w_k    <= '0;
        wr_rr  <= (w_cur == WCW'(NWR - 1)) ? '0 : w_cur + 1'b1;
      end else begin
        w_busy   <= 1'b1;
        w_client <= w_cur;
        w_k      <= (int'(w_k) == WBPT - 1) ? '0 : w_k + 1'b1;
        // next bus write starts MPS bytes further
        if (int'(w_k) == WBPT - 1) w_addr <= bus_wr_addr + ADDR_W'(MPS);
        else if (!w_busy)          w_addr <= wr_addr[w_sel];
      end
    end
  end

  a_cpl_expected: assert property (@(posedge clk) disable iff (!rst_n)
    bus_cpl_valid |-> arrived[bus_cpl_tag] < (BW+1)'(BPT)) else $error("dma_engine: too many completion beats");
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_any && !sp_busy) |-> rd_req_addr[rd_sel][5:0] == 6'd0) else $error("dma_engine: unaligned read");
endmodule
