// req_trans_core: turns sub-WQEs of RDMA WRITE requests into packets (ReqTransCore).
//
// For each sub-WQE (one scatter/gather element of a WQE):
//   1. Generate Memory Addresses: read the MPT entry of the local key (virtual base of the
//      region and the index of its first MTT entry), then, for each packet, the MTT entry
//      of the page holding the packet's first byte, which gives the physical address;
//   2. read the QP context for the destination QP number and the next PSN;
//   3. cut the element into packets of at most MTU bytes that do not cross a page;
//   4. Gather Data: DMA-read each packet's payload (gather_data);
//   5. Generate RETH {remote address, rkey, length} and Append Header (16 bytes);
//   6. Generate BTH {opcode, destination QP, PSN} and Append Header (12 bytes);
//   7. pass the packet to the transport subsystem; finally write the advanced PSN back
//      into the QP context.
// Every packet is a self-contained RDMA WRITE ONLY packet carrying its own RETH. Other
// operation codes (SEND, READ) are counted in stat_unsupported and dropped.
//
// Table entries (little-endian bit fields):
//   MPT (256 bits): [63:0] virtual base, [95:64] first MTT index.
//   MTT (64 bits) : physical address of a 2^PAGE_LOG-byte page.
//   QPC (416 bits): [23:0] destination QPN, [47:24] next PSN; other bits are kept.
// Headers on the wire (byte 0 first, multi-byte fields big-endian):
//   BTH : opcode, flags 0, P_Key FFFF, 0, dest QPN(3), A-bit on the last packet, PSN(3).
//   RETH: virtual address(8), rkey(4), DMA length(4).
//
// Interface and timing: sub_* is a valid/ready input; the table ports are request/
// response pairs of a resource subsystem channel; gather DMA ports go to the DMA engine;
// out_* is the packet stream. The core handles one packet at a time: lookups, then the
// payload stream (one beat per clock once the DMA data arrives).
// Follows the paper's figure for the stage order (MPT/MTT, gather, RETH, append, BTH,
// append). This design's choices: the entry layouts, one packet in flight, the MTU and
// page size, RETH on every packet, no memory-key bounds or access checks.
module req_trans_core
  import jz_pkg::*;
#(
  parameter int unsigned MTU      = 512,
  parameter int unsigned PAGE_LOG = 12,
  parameter int unsigned MPT_W    = 256,
  parameter int unsigned MTT_W    = 64,
  parameter int unsigned QPC_W    = 416,
  parameter int unsigned KEY_W    = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // sub-WQEs from the queue subsystem
  input  logic              sub_valid,
  output logic              sub_ready,
  input  sub_wqe_t          sub_wqe,
  // MPT lookup
  output logic              mpt_req_valid,
  input  logic              mpt_req_ready,
  output logic [KEY_W-1:0]  mpt_req_key,
  input  logic              mpt_rsp_valid,
  output logic              mpt_rsp_ready,
  input  logic [MPT_W-1:0]  mpt_rsp_data,
  // MTT lookup
  output logic              mtt_req_valid,
  input  logic              mtt_req_ready,
  output logic [KEY_W-1:0]  mtt_req_key,
  input  logic              mtt_rsp_valid,
  output logic              mtt_rsp_ready,
  input  logic [MTT_W-1:0]  mtt_rsp_data,
  // QP context lookup and write-back
  output logic              qpc_req_valid,
  input  logic              qpc_req_ready,
  output logic [KEY_W-1:0]  qpc_req_key,
  input  logic              qpc_rsp_valid,
  output logic              qpc_rsp_ready,
  input  logic [QPC_W-1:0]  qpc_rsp_data,
  output logic              qpc_wr_valid,
  input  logic              qpc_wr_ready,
  output logic [KEY_W-1:0]  qpc_wr_key,
  output logic [QPC_W-1:0]  qpc_wr_data,
  // payload DMA
  output logic              dma_rd_valid,
  input  logic              dma_rd_ready,
  output logic [ADDR_W-1:0] dma_rd_addr,
  output logic [LEN_W-1:0]  dma_rd_len,
  input  logic              dma_rsp_valid,
  output logic              dma_rsp_ready,
  input  beat_t             dma_rsp_beat,
  // packets to the transport subsystem
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_beat,
  // statistics
  output logic [15:0]       cur_qpn,       // QP being served (connection of the lookups)
  output logic [31:0]       stat_pkts,
  output logic [31:0]       stat_unsupported
);
  localparam logic [7:0] OPC_WRITE_ONLY = 8'h0A;

  typedef enum logic [3:0] {
    R_IDLE, R_MPT, R_MPT_W, R_QPC, R_QPC_W, R_MTT, R_MTT_W, R_GATHER, R_STREAM, R_WB
  } state_e;
  state_e state;

  sub_wqe_t          w;
  logic [63:0]       va_base;
  logic [31:0]       mtt_base;
  logic [QPC_W-1:0]  qpc;
  logic [23:0]       psn;
  logic [31:0]       done_b;        // bytes of the element already sent
  logic [LEN_W-1:0]  plen;          // bytes of the current packet
  logic [63:0]       phys;

  // next packet: start address and length
  logic [63:0] pva;
  logic [31:0] left, to_page, cut;
  assign pva     = w.laddr + 64'(done_b);
  assign left    = w.len - done_b;
  assign to_page = 32'((64'd1 << PAGE_LOG) - (pva & ((64'd1 << PAGE_LOG) - 1)));
  always_comb begin
    cut = left;
    if (cut > 32'(MTU)) cut = 32'(MTU);
    if (cut > to_page)  cut = to_page;
  end

  assign sub_ready     = (state == R_IDLE);
  assign cur_qpn       = w.qpn;
  assign mpt_req_valid = (state == R_MPT);
  assign mpt_req_key   = KEY_W'(w.lkey);
  assign mpt_rsp_ready = (state == R_MPT_W);
  assign qpc_req_valid = (state == R_QPC);
  assign qpc_req_key   = KEY_W'(w.qpn);
  assign qpc_rsp_ready = (state == R_QPC_W);
  assign mtt_req_valid = (state == R_MTT);
  assign mtt_req_key   = KEY_W'(mtt_base + 32'((pva - va_base) >> PAGE_LOG));
  assign mtt_rsp_ready = (state == R_MTT_W);
  assign qpc_wr_valid  = (state == R_WB);
  assign qpc_wr_key    = KEY_W'(w.qpn);
  always_comb begin
    qpc_wr_data        = qpc;
    qpc_wr_data[47:24] = psn;
  end

  // ---------------- Gather Data ----------------
  logic  g_cmd_valid, g_cmd_ready, g_valid, g_ready;
  beat_t g_beat;
  assign g_cmd_valid = (state == R_GATHER);
  gather_data u_gather (
    .clk, .rst_n,
    .cmd_valid(g_cmd_valid), .cmd_ready(g_cmd_ready), .cmd_addr(phys), .cmd_len(plen),
    .dma_rd_valid, .dma_rd_ready, .dma_rd_addr, .dma_rd_len,
    .dma_rsp_valid, .dma_rsp_ready, .dma_rsp_beat,
    .out_valid(g_valid), .out_ready(g_ready), .out_beat(g_beat));

  // ---------------- Generate RETH / BTH, Append Header ----------------
  function automatic logic [127:0] make_reth(input logic [63:0] va, input logic [31:0] rkey,
                                             input logic [31:0] len);
    logic [127:0] h;
    for (int i = 0; i < 8; i++) h[8*i +: 8] = va[8*(7-i) +: 8];
    for (int i = 0; i < 4; i++) h[64 + 8*i +: 8] = rkey[8*(3-i) +: 8];
    for (int i = 0; i < 4; i++) h[96 + 8*i +: 8] = len[8*(3-i) +: 8];
    return h;
  endfunction
  function automatic logic [95:0] make_bth(input logic [7:0] opc, input logic [23:0] dqpn,
                                           input logic ack_req, input logic [23:0] p);
    logic [95:0] h;
    h[7:0]   = opc;
    h[15:8]  = 8'h00;
    h[31:16] = 16'hFFFF;
    h[39:32] = 8'h00;
    for (int i = 0; i < 3; i++) h[40 + 8*i +: 8] = dqpn[8*(2-i) +: 8];
    h[71:64] = {ack_req, 7'd0};
    for (int i = 0; i < 3; i++) h[72 + 8*i +: 8] = p[8*(2-i) +: 8];
    return h;
  endfunction

  logic [127:0] reth;
  logic [95:0]  bth;
  logic         r_valid, r_ready;
  beat_t        r_beat;
  append_header #(.HDR_BYTES(16)) u_add_reth (
    .clk, .rst_n, .in_valid(g_valid), .in_ready(g_ready), .in_beat(g_beat), .in_hdr(reth),
    .out_valid(r_valid), .out_ready(r_ready), .out_beat(r_beat));
  append_header #(.HDR_BYTES(12)) u_add_bth (
    .clk, .rst_n, .in_valid(r_valid), .in_ready(r_ready), .in_beat(r_beat), .in_hdr(bth),
    .out_valid, .out_ready, .out_beat);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state            <= R_IDLE;
      w                <= '0;
      va_base          <= '0;
      mtt_base         <= '0;
      qpc              <= '0;
      psn              <= '0;
      done_b           <= '0;
      plen             <= '0;
      phys             <= '0;
      reth             <= '0;
      bth              <= '0;
      stat_pkts        <= '0;
      stat_unsupported <= '0;
    end else begin
      unique case (state)
        R_IDLE: if (sub_valid) begin
          w      <= sub_wqe;
          done_b <= '0;
          if (sub_wqe.opcode != OP_RDMA_WRITE) stat_unsupported <= stat_unsupported + 1;
          else if (sub_wqe.len != '0)          state <= R_MPT;
        end
        R_MPT:   if (mpt_req_ready) state <= R_MPT_W;
        R_MPT_W: if (mpt_rsp_valid) begin
          va_base  <= mpt_rsp_data[63:0];
          mtt_base <= mpt_rsp_data[95:64];
          state    <= R_QPC;
        end
        R_QPC:   if (qpc_req_ready) state <= R_QPC_W;
        R_QPC_W: if (qpc_rsp_valid) begin
          qpc   <= qpc_rsp_data;
          psn   <= qpc_rsp_data[47:24];
          state <= R_MTT;
        end
        R_MTT:   if (mtt_req_ready) state <= R_MTT_W;
        R_MTT_W: if (mtt_rsp_valid) begin
          phys  <= 64'(mtt_rsp_data) | (pva & ((64'd1 << PAGE_LOG) - 1));
          plen  <= LEN_W'(cut);
          reth  <= make_reth(w.raddr + 64'(done_b), w.rkey, cut);
          bth   <= make_bth(OPC_WRITE_ONLY, qpc[23:0], cut == left, psn);
          state <= R_GATHER;
        end
        R_GATHER: if (g_cmd_ready) state <= R_STREAM;
        R_STREAM: if (out_valid && out_ready && out_beat.last) begin
          done_b    <= done_b + 32'(plen);
          psn       <= psn + 1'b1;
          stat_pkts <= stat_pkts + 1;
          state     <= (done_b + 32'(plen) == w.len) ? R_WB : R_MTT;
        end
        R_WB: if (qpc_wr_ready) state <= R_IDLE;
        default: state <= R_IDLE;
      endcase
    end
  end

  a_mtu: assert property (@(posedge clk) disable iff (!rst_n)
    state == R_GATHER |-> plen != '0 && plen <= LEN_W'(MTU)) else $error("req_trans_core: bad packet length");
endmodule
