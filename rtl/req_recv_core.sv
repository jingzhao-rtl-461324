// req_recv_core: the receiving side of RDMA WRITE (a reduced ReqRecvCore).
//
// A packet from the transport subsystem passes Remove Header twice: the first strips the
// 12-byte BTH, the second the 16-byte RETH, whose virtual address is then used as the
// host address of the payload. The payload beats are written to host memory by DMA as one
// write starting at that address (Scatter of a single element). The packet count and the
// payload byte count are kept.
//
// Interface and timing: in_* is the packet stream (valid/ready); wr_* is a DMA-engine
// write client (wr_addr valid with the first beat, beat_t last on the final beat). The
// payload passes at one beat per clock after one bubble per header.
// From the paper: the headers and the remove-header step. Not built: the receive-side
// memory-key translation and access check (the RETH address is used as a physical
// address), opcode and PSN checks, SEND and READ handling, completions. The remote
// address must be 64-byte aligned (the DMA engine writes whole aligned beats).
module req_recv_core
  import jz_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output beat_t             wr_beat,
  output logic [31:0]       stat_pkts,
  output logic [31:0]       stat_bytes
);
  logic         b_valid, b_ready;
  beat_t        b_beat;
  logic [95:0]  bth;
  logic [127:0] reth;

  remove_header #(.HDR_BYTES(12)) u_rm_bth (
    .clk, .rst_n, .in_valid, .in_ready, .in_beat,
    .out_valid(b_valid), .out_ready(b_ready), .out_beat(b_beat), .out_hdr(bth));
  remove_header #(.HDR_BYTES(16)) u_rm_reth (
    .clk, .rst_n, .in_valid(b_valid), .in_ready(b_ready), .in_beat(b_beat),
    .out_valid(wr_valid), .out_ready(wr_ready), .out_beat(wr_beat), .out_hdr(reth));

  // RETH virtual address, big-endian in bytes 0..7
  always_comb
    for (int i = 0; i < 8; i++) wr_addr[8*i +: 8] = reth[8*(7-i) +: 8];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stat_pkts  <= '0;
      stat_bytes <= '0;
    end else if (wr_valid && wr_ready) begin
      stat_bytes <= stat_bytes + 32'(wr_beat.nbytes);
      if (wr_beat.last) stat_pkts <= stat_pkts + 1;
    end
  end

  a_opcode: assert property (@(posedge clk) disable iff (!rst_n)
    b_valid && b_ready |-> bth[7:0] == 8'h0A) else $error("req_recv_core: not an RDMA WRITE packet");
endmodule
