// key_value_core: key-value store offload of the reference design's extension (Key-Value Core).
//
// TX pipeline (client side): a request from the queue side carries an operation (GET or
// SET), a key generated by software and, for SET, a value. Generate Key packs it into a
// one-beat payload, Generate ETH builds a 14-byte Ethernet header and Append Header puts it
// in front; the packet leaves on out_* towards the transport side.
// RX pipeline: Remove Header strips the Ethernet header of a packet from in_*, Extract Key
// parses the payload. Responses go to the client result port res_*. Requests are handed
// in order to NHASH SHA-256 cores (sha256_core, 64 clocks per hash); results are taken
// back in the same order, so requests are answered in arrival order. Value Search uses
// the 64-bit hash (digest bits 255:192): bits 9:0 index the value memory (VAL_DEPTH
// entries of VAL_W bits) and the other 54 bits are kept as a tag, so a key whose slot
// holds another key's tag misses. GET returns the value (RSP_HIT) or RSP_MISS; SET
// writes value and tag, replacing whatever held the slot, and returns RSP_SET. Generate
// Response queues the answer, which goes back through Generate ETH (destination = the
// requester's MAC) and Append Header; responses have priority over new client requests.
// Payload layout (bytes after the Ethernet header): 0 op, 1 key length (0..KEY_BYTES),
// 2..2+KEY_BYTES-1 key, then VAL_W/8 bytes of value; one 64-byte beat. Ethernet header:
// bytes 0..5 destination MAC, 6..11 source MAC, 12..13 ETHERTYPE (big-endian, MACs
// most significant byte first).
// Follows the paper: the two pipelines and their stages, the Ethernet header, software
// keys carried in the WQE, N parallel SHA-256 cores of 64 clocks each, a 64-bit hash and
// the 256 x 1024 value memory. The reference lists that memory as a Resource Subsystem
// cache of values kept in host memory; here it is the store itself, on chip, with no host
// backing, so lookups never wait for the system bus. This design's own: the payload
// layout, op codes, the key length limit, tag check, direct-mapped replacement, in-order
// dispatch, the response priority and the request port standing for the KV WQE.
module key_value_core
  import jz_pkg::*;
#(
  parameter int unsigned NHASH     = 16,
  parameter int unsigned VAL_W     = 256,
  parameter int unsigned VAL_DEPTH = 1024,
  parameter int unsigned KEY_BYTES = 24,
  parameter logic [47:0] MAC       = 48'h02_00_00_00_00_01,
  parameter logic [15:0] ETHERTYPE = 16'h88B5
)(
  input  logic                   clk,
  input  logic                   rst_n,
  // requests from the queue side (KV WQE)
  input  logic                   req_valid,
  output logic                   req_ready,
  input  logic                   req_set,       // 1 = SET, 0 = GET
  input  logic [5:0]             req_key_len,
  input  logic [8*KEY_BYTES-1:0] req_key,       // byte i in bits 8i+7:8i
  input  logic [VAL_W-1:0]       req_value,
  input  logic [47:0]            req_dst_mac,
  // results of this core's own requests
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic [7:0]             res_op,        // RSP_HIT, RSP_MISS or RSP_SET
  output logic [5:0]             res_key_len,
  output logic [8*KEY_BYTES-1:0] res_key,
  output logic [VAL_W-1:0]       res_value,
  // packets to and from the transport side
  output logic                   out_valid,
  input  logic                   out_ready,
  output beat_t                  out_beat,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  beat_t                  in_beat,
  // counters
  output logic [31:0]            stat_req_tx,
  output logic [31:0]            stat_req_rx,
  output logic [31:0]            stat_hits,
  output logic [31:0]            stat_misses,
  output logic [31:0]            stat_sets,
  output logic [31:0]            stat_bad
);
  localparam logic [7:0] OP_GET   = 8'h01;
  localparam logic [7:0] OP_SET   = 8'h02;
  localparam logic [7:0] RSP_HIT  = 8'h81;
  localparam logic [7:0] RSP_MISS = 8'h82;
  localparam logic [7:0] RSP_SET  = 8'h83;
  localparam int unsigned PAY_BYTES = 2 + KEY_BYTES + VAL_W / 8;
  localparam int unsigned IW = $clog2(VAL_DEPTH);
  localparam int unsigned TW = 64 - IW;
  localparam int unsigned HW = (NHASH > 1) ? $clog2(NHASH) : 1;

  typedef struct packed {
    logic [47:0]            mac;   // requester (RX) or destination (TX)
    logic [7:0]             op;
    logic [5:0]             klen;
    logic [8*KEY_BYTES-1:0] key;
    logic [VAL_W-1:0]       value;
  } kv_msg_t;

  initial begin
    assert (PAY_BYTES <= 64) else $fatal(1, "key_value_core: payload must fit one beat");
    assert (KEY_BYTES <= 55) else $fatal(1, "key_value_core: key must fit one SHA-256 block");
  end

  // ---------------- RX: Remove Header, Extract Key ----------------
  logic       rh_valid, rh_ready;
  beat_t      rh_beat;
  logic [111:0] rh_hdr;
  remove_header #(.HDR_BYTES(14)) u_rm (
    .clk, .rst_n, .in_valid, .in_ready, .in_beat,
    .out_valid(rh_valid), .out_ready(rh_ready), .out_beat(rh_beat), .out_hdr(rh_hdr));

  kv_msg_t rx_msg;
  logic    rx_first;           // next payload beat is the first of its packet
  always_comb begin
    rx_msg.mac = '0;
    for (int i = 0; i < 6; i++) rx_msg.mac[47 - 8*i -: 8] = rh_hdr[8*(6+i) +: 8];   // source MAC
    rx_msg.op   = rh_beat.data[7:0];
    rx_msg.klen = rh_beat.data[13:8];
    rx_msg.key  = rh_beat.data[16 +: 8*KEY_BYTES];
    rx_msg.value = rh_beat.data[8*(2+KEY_BYTES) +: VAL_W];
  end
  wire rx_is_req = (rx_msg.op == OP_GET || rx_msg.op == OP_SET) && rx_msg.klen <= 6'(KEY_BYTES);
  wire rx_is_rsp = rx_msg.op == RSP_HIT || rx_msg.op == RSP_MISS || rx_msg.op == RSP_SET;

  logic    wq_full, wq_empty, wq_pop;
  kv_msg_t wq_dout;
  logic    rs_full, rs_empty;
  kv_msg_t rs_dout;
  logic [$clog2(5)-1:0] rs_count;
  logic [$clog2(5)-1:0] wq_count;

  // non-first beats and unknown payloads are consumed and dropped
  assign rh_ready = !rx_first || (rx_is_req ? !wq_full : rx_is_rsp ? !rs_full : 1'b1);
  wire rx_take = rh_valid && rh_ready && rx_first;

  always_ff @(posedge clk) begin
    if (!rst_n) rx_first <= 1'b1;
    else if (rh_valid && rh_ready) rx_first <= rh_beat.last;
  end

  // work queue towards the hash cores
  sync_fifo #(.T(kv_msg_t), .DEPTH(4)) u_wq (
    .clk, .rst_n, .push(rx_take && rx_is_req), .din(rx_msg), .full(wq_full),
    .pop(wq_pop), .dout(wq_dout), .empty(wq_empty), .count(wq_count));
  // results for the client
  sync_fifo #(.T(kv_msg_t), .DEPTH(4)) u_res (
    .clk, .rst_n, .push(rx_take && rx_is_rsp), .din(rx_msg), .full(rs_full),
    .pop(res_valid && res_ready), .dout(rs_dout), .empty(rs_empty), .count(rs_count));
  assign res_valid   = !rs_empty;
  assign res_op      = rs_dout.op;
  assign res_key_len = rs_dout.klen;
  assign res_key     = rs_dout.key;
  assign res_value   = rs_dout.value;

  // ---------------- Hash x NHASH ----------------
  function automatic logic [511:0] sha_block(input logic [8*KEY_BYTES-1:0] key, input logic [5:0] n);
    logic [511:0] b;
    b = '0;
    for (int i = 0; i < KEY_BYTES; i++)
      if (i < int'(n)) b[511 - 8*i -: 8] = key[8*i +: 8];
    b[511 - 8*int'(n) -: 8] = 8'h80;
    b[63:0] = 64'({n, 3'b000});
    return b;
  endfunction

  logic [NHASH-1:0]  h_start, h_busy, h_done, h_held, h_ready;
  logic [255:0]      h_digest [NHASH];
  logic [63:0]       h_hash   [NHASH];
  kv_msg_t           h_msg    [NHASH];
  logic [HW-1:0]     dp, cp;   // dispatch and collect pointers (round robin, in order)
  wire [511:0]       wq_block = sha_block(wq_dout.key, wq_dout.klen);

  for (genvar i = 0; i < NHASH; i++) begin : g_hash
    sha256_core u_sha (.clk, .rst_n, .start(h_start[i]), .block(wq_block),
                       .busy(h_busy[i]), .done(h_done[i]), .digest(h_digest[i]));
  end

  assign wq_pop = !wq_empty && !h_held[dp] && !h_busy[dp];
  always_comb begin
    h_start = '0;
    h_start[dp] = wq_pop;
  end

  function automatic logic [HW-1:0] next_ptr(input logic [HW-1:0] p);
    return (int'(p) == NHASH - 1) ? '0 : p + 1'b1;
  endfunction

  // ---------------- Value Search ----------------
  logic [VAL_W-1:0] vmem [VAL_DEPTH];
  logic [TW-1:0]    tmem [VAL_DEPTH];
  logic [VAL_DEPTH-1:0] vld;
  logic             vs_busy;     // a search is in its second cycle
  kv_msg_t          vs_msg;
  logic [IW-1:0]    vs_idx;
  logic [TW-1:0]    vs_tag;
  logic [VAL_W-1:0] vs_val;
  logic [TW-1:0]    vs_stored_tag;
  logic             vs_stored_vld;

  logic    gr_full, gr_empty, gr_pop;
  kv_msg_t gr_din, gr_dout;
  logic [$clog2(5)-1:0] gr_count;
  // a search starts only when its response is sure to find room
  wire vs_start = h_held[cp] && h_ready[cp] && !vs_busy && !gr_full;
  wire [63:0] cp_hash = h_hash[cp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dp <= '0; cp <= '0; h_held <= '0; h_ready <= '0; vs_busy <= 1'b0; vld <= '0;
      vs_msg <= '0; vs_idx <= '0; vs_tag <= '0;
      for (int i = 0; i < NHASH; i++) begin h_hash[i] <= '0; h_msg[i] <= '0; end
    end else begin
      if (wq_pop) begin
        h_held[dp] <= 1'b1;
        h_msg[dp]  <= wq_dout;
        dp         <= next_ptr(dp);
      end
      for (int i = 0; i < NHASH; i++)
        if (h_done[i]) begin h_ready[i] <= 1'b1; h_hash[i] <= h_digest[i][255:192]; end
      vs_busy <= vs_start;
      if (vs_start) begin
        h_held[cp]  <= 1'b0;
        h_ready[cp] <= 1'b0;
        cp          <= next_ptr(cp);
        vs_msg      <= h_msg[cp];
        vs_idx      <= cp_hash[IW-1:0];
        vs_tag      <= cp_hash[63:IW];
      end
      if (vs_busy && vs_msg.op == OP_SET) vld[vs_idx] <= 1'b1;
    end
  end

  // value and tag memories: registered read in the first cycle, write in the second
  always_ff @(posedge clk) begin
    if (vs_start) begin
      vs_val        <= vmem[cp_hash[IW-1:0]];
      vs_stored_tag <= tmem[cp_hash[IW-1:0]];
    end
    if (vs_busy && vs_msg.op == OP_SET) begin
      vmem[vs_idx] <= vs_msg.value;
      tmem[vs_idx] <= vs_tag;
    end
  end
  assign vs_stored_vld = vld[vs_idx];

  // ---------------- Generate Response ----------------
  wire vs_hit = vs_stored_vld && vs_stored_tag == vs_tag;
  always_comb begin
    gr_din = vs_msg;
    if (vs_msg.op == OP_SET) gr_din.op = RSP_SET;
    else if (vs_hit) begin gr_din.op = RSP_HIT; gr_din.value = vs_val; end
    else begin gr_din.op = RSP_MISS; gr_din.value = '0; end
  end
  sync_fifo #(.T(kv_msg_t), .DEPTH(4)) u_gr (
    .clk, .rst_n, .push(vs_busy), .din(gr_din), .full(gr_full),
    .pop(gr_pop), .dout(gr_dout), .empty(gr_empty), .count(gr_count));

  // ---------------- TX: Generate Key, Generate ETH, Append Header ----------------
  kv_msg_t tx_msg;
  always_comb begin
    tx_msg.mac   = req_dst_mac;
    tx_msg.op    = req_set ? OP_SET : OP_GET;
    tx_msg.klen  = req_key_len;
    tx_msg.key   = req_key;
    tx_msg.value = req_set ? req_value : '0;
  end
  logic    ah_valid, ah_ready;
  beat_t   ah_beat;
  logic [111:0] ah_hdr;
  kv_msg_t sel;
  assign sel      = gr_empty ? tx_msg : gr_dout;
  assign ah_valid = !gr_empty || req_valid;
  assign gr_pop   = !gr_empty && ah_ready;
  assign req_ready = gr_empty && ah_ready;
  always_comb begin
    ah_beat = '0;
    ah_beat.data[7:0]  = sel.op;
    ah_beat.data[13:8] = sel.klen;
    ah_beat.data[16 +: 8*KEY_BYTES] = sel.key;
    ah_beat.data[8*(2+KEY_BYTES) +: VAL_W] = sel.value;
    ah_beat.nbytes = 7'(PAY_BYTES);
    ah_beat.last   = 1'b1;
    for (int i = 0; i < 6; i++) begin
      ah_hdr[8*i +: 8]     = sel.mac[47 - 8*i -: 8];
      ah_hdr[8*(6+i) +: 8] = MAC[47 - 8*i -: 8];
    end
    ah_hdr[103:96]  = ETHERTYPE[15:8];
    ah_hdr[111:104] = ETHERTYPE[7:0];
  end
  append_header #(.HDR_BYTES(14)) u_ah (
    .clk, .rst_n, .in_valid(ah_valid), .in_ready(ah_ready), .in_beat(ah_beat), .in_hdr(ah_hdr),
    .out_valid, .out_ready, .out_beat);

  // ---------------- counters ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stat_req_tx <= '0; stat_req_rx <= '0; stat_hits <= '0;
      stat_misses <= '0; stat_sets <= '0; stat_bad <= '0;
    end else begin
      if (req_valid && req_ready) stat_req_tx <= stat_req_tx + 1;
      if (rx_take && rx_is_req) stat_req_rx <= stat_req_rx + 1;
      if (rx_take && !rx_is_req && !rx_is_rsp) stat_bad <= stat_bad + 1;
      if (vs_busy && vs_msg.op == OP_SET) stat_sets <= stat_sets + 1;
      if (vs_busy && vs_msg.op != OP_SET && vs_hit) stat_hits <= stat_hits + 1;
      if (vs_busy && vs_msg.op != OP_SET && !vs_hit) stat_misses <= stat_misses + 1;
    end
  end
endmodule
