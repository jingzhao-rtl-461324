// jz_pkg: types and constants shared by the NIC blocks.
//
// All streaming blocks move packets over a 512-bit bus (64 bytes per beat). Byte 0 of a
// beat sits in bits 7:0. Every beat of a packet is full except possibly the last one,
// whose valid bytes are bytes 0 .. nbytes-1; nbytes always holds the real count, 1..64. The 512-bit width follows the
// paper's "internal data bus is set to 512-bit"; the nbytes/last encoding is this
// design's own choice.
package jz_pkg;

  localparam int unsigned DATA_W   = 512;
  localparam int unsigned BEAT_B   = DATA_W / 8;   // 64 bytes per beat
  localparam int unsigned NBYTES_W = 7;            // holds 1..64
  localparam int unsigned ADDR_W   = 64;           // host physical address
  localparam int unsigned LEN_W    = 16;           // byte length of a DMA transfer

  // One beat of a packet stream.
  typedef struct packed {
    logic [DATA_W-1:0]   data;
    logic [NBYTES_W-1:0] nbytes;   // valid bytes of this beat (1..64)
    logic                last;     // last beat of the packet
  } beat_t;

  // Transport packet types carried in the link sideband.
  typedef enum logic [1:0] {
    PKT_DATA = 2'd0,
    PKT_ACK  = 2'd1,
    PKT_NAK  = 2'd2
  } pkt_type_e;

  // Link sideband header of a transport packet, valid with every beat of the packet.
  typedef struct packed {
    pkt_type_e   ptype;
    logic [15:0] psn;      // DATA: packet sequence number; ACK/NAK: next PSN expected
  } ts_hdr_t;

  // RDMA operation codes carried in a WQE.
  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_RDMA_WRITE = 4'd1,
    OP_SEND       = 4'd2,
    OP_RDMA_READ  = 4'd3
  } rdma_op_e;

  // A sub-WQE: one scatter/gather element of a work request, as emitted by the WQE parser.
  typedef struct packed {
    logic [15:0] qpn;        // queue (QP) number
    rdma_op_e    opcode;
    logic        last_sge;   // last element of its WQE
    logic [31:0] lkey;       // local memory key (MPT index)
    logic [63:0] laddr;      // local virtual address
    logic [31:0] len;        // bytes
    logic [31:0] rkey;       // remote key
    logic [63:0] raddr;      // remote virtual address
  } sub_wqe_t;

  // Number of bytes of a DMA transfer needed to cover [addr, addr+len): in whole beats.
  function automatic int unsigned beats_of(input int unsigned nbytes);
    return (nbytes + BEAT_B - 1) / BEAT_B;
  endfunction

  // Event counters of the whole NIC.
  typedef struct packed {
    logic [31:0] wqes;           // WQEs parsed
    logic [31:0] throttled;      // WQE fetches refused by the rate limiter
    logic [31:0] qcache_hits;
    logic [31:0] qcache_misses;
    logic [31:0] qpc_hits;
    logic [31:0] qpc_misses;
    logic [31:0] mpt_hits;
    logic [31:0] mpt_misses;
    logic [31:0] mtt_hits;
    logic [31:0] mtt_misses;
    logic [31:0] tx_pkts;        // packets built by the request core
    logic [31:0] unsupported;    // sub-WQEs with an operation not built
    logic [31:0] ts_new;
    logic [31:0] ts_retx;
    logic [31:0] ts_timeouts;
    logic [31:0] ts_acks;
    logic [31:0] ts_naks;
    logic [31:0] ts_ooo;
    logic [31:0] ts_drops;
    logic [31:0] ts_dups;
    logic [31:0] rx_pkts;        // packets written to host memory
    logic [31:0] rx_bytes;
  } nic_stats_t;

endpackage
