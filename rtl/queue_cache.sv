// queue_cache: on-chip cache of work queue elements, with cache records and DMA refill.
//
// The Cache Buffer holds SLOTS slots of SLOT_W bits, grouped into cells of CELL_SLOTS
// slots. A queue maps to the cell given by the low bits of its queue number; a cell is
// owned by one queue at a time and is taken over by another queue that maps to it when
// that queue needs it. A Cache Record per cell holds the owner, the index of the WQE in
// the cell's first WQE position (the offset) and the number of valid WQEs. A lookup for
// (queue, WQE index) hits when the record's owner is the queue and the index lies in the
// cell's valid range; the WQE (WQE_SEGS slots) is then returned. On a miss the cache reads
// by DMA as many WQEs as fit in the cell, are posted (tail - head) and lie before the end of
// the ring, fills the cell, updates the record and returns the WQE.
// Cells, slots, records, owner, offset and the low-bit mapping are the paper's; the paper
// refills ahead of time when a cell runs low ("a predefined threshold"), this design
// refills when the wanted WQE is not in the cell (threshold 0). The 16-slot cell and
// one-WQE-per-beat DMA layout are this design's choices.
// Timing: a hit answers 2 clocks after the request; a miss after the DMA data plus 1.
module queue_cache
  import jz_pkg::*;
#(
  parameter int unsigned SLOT_W     = 128,
  parameter int unsigned SLOTS      = 1024,
  parameter int unsigned CELL_SLOTS = 16,
  parameter int unsigned WQE_SEGS   = 4       // slots per WQE: 64-byte WQEs
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [15:0]       req_qpn,
  input  logic [15:0]       req_idx,      // WQE index (queue head counter)
  input  logic [15:0]       req_avail,    // posted WQEs from req_idx on (>= 1)
  input  logic [ADDR_W-1:0] req_base,     // host address of the ring
  input  logic [4:0]        req_size_log, // ring holds 2**req_size_log WQEs
  output logic              rsp_valid,
  output logic [SLOT_W*WQE_SEGS-1:0] rsp_wqe,
  output logic              dma_rd_valid,
  input  logic              dma_rd_ready,
  output logic [ADDR_W-1:0] dma_rd_addr,
  output logic [LEN_W-1:0]  dma_rd_len,
  input  logic              dma_rsp_valid,
  output logic              dma_rsp_ready,
  input  beat_t             dma_rsp_beat,
  output logic [31:0]       stat_hits,
  output logic [31:0]       stat_misses
);
  localparam int unsigned NCELLS    = SLOTS / CELL_SLOTS;
  localparam int unsigned CELL_WQES = CELL_SLOTS / WQE_SEGS;
  localparam int unsigned CW        = $clog2(NCELLS);
  localparam int unsigned SW        = $clog2(SLOTS);
  localparam int unsigned WQE_B     = SLOT_W * WQE_SEGS / 8;

  logic [SLOT_W-1:0] slots [SLOTS];
  logic [NCELLS-1:0] rec_valid;
  logic [15:0]       rec_owner [NCELLS];
  logic [15:0]       rec_first [NCELLS];
  logic [15:0]       rec_count [NCELLS];

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_ISSUE, S_FILL, S_RESP} state_e;
  state_e            state;
  logic [15:0]       qpn, idx, avail;
  logic [ADDR_W-1:0] base;
  logic [4:0]        size_log;
  logic [CW-1:0]     cell_no;
  logic [15:0]       nfill, nbeat;
  logic              hit;
  logic [15:0]       ring_left, want;

  assign cell_no      = qpn[CW-1:0];
  assign hit       = rec_valid[cell_no] && rec_owner[cell_no] == qpn &&
                     (idx - rec_first[cell_no]) < rec_count[cell_no];
  assign ring_left = 16'((32'd1 << size_log) - 32'(idx & 16'((32'd1 << size_log) - 1)));
  always_comb begin
    want = avail;
    if (want > 16'(CELL_WQES)) want = 16'(CELL_WQES);
    if (want > ring_left)      want = ring_left;
  end

  assign req_ready     = (state == S_IDLE);
  assign dma_rd_valid  = (state == S_ISSUE);
  assign dma_rd_addr   = base + ADDR_W'(idx & 16'((32'd1 << size_log) - 1)) * ADDR_W'(WQE_B);
  assign dma_rd_len    = LEN_W'(nfill) * LEN_W'(WQE_B);
  assign dma_rsp_ready = (state == S_FILL);
  assign rsp_valid     = (state == S_RESP);

  // WQE read from the cell
  logic [SW-1:0] wslot;
  assign wslot = SW'(cell_no) * SW'(CELL_SLOTS) + SW'(16'(idx - rec_first[cell_no]) * 16'(WQE_SEGS));
  always_comb
    for (int s = 0; s < WQE_SEGS; s++) rsp_wqe[SLOT_W*s +: SLOT_W] = slots[wslot + SW'(s)];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      qpn         <= '0;
      idx         <= '0;
      avail       <= '0;
      base        <= '0;
      size_log    <= '0;
      nfill       <= '0;
      nbeat       <= '0;
      rec_valid   <= '0;
      stat_hits   <= '0;
      stat_misses <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          qpn <= req_qpn; idx <= req_idx; avail <= req_avail;
          base <= req_base; size_log <= req_size_log;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            stat_hits <= stat_hits + 1;
            state     <= S_RESP;
          end else begin
            stat_misses <= stat_misses + 1;
            nfill       <= want;
            state       <= S_ISSUE;
          end
        end
        S_ISSUE: if (dma_rd_ready) begin
          nbeat <= '0;
          rec_valid[cell_no] <= 1'b0;      // the cell is being taken over
          state <= S_FILL;
        end
        S_FILL: if (dma_rsp_valid) begin
          nbeat <= nbeat + 1'b1;
          if (nbeat + 1'b1 == nfill) begin
            rec_valid[cell_no] <= 1'b1;
            rec_owner[cell_no] <= qpn;
            rec_first[cell_no] <= idx;
            rec_count[cell_no] <= nfill;
            state <= S_RESP;
          end
        end
        S_RESP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // one 64-byte beat is one WQE: WQE_SEGS slots
  always_ff @(posedge clk) begin
    if (state == S_FILL && dma_rsp_valid)
      for (int s = 0; s < WQE_SEGS; s++)
        slots[SW'(cell_no) * SW'(CELL_SLOTS) + SW'(nbeat) * SW'(WQE_SEGS) + SW'(s)]
          <= dma_rsp_beat.data[SLOT_W*s +: SLOT_W];
  end

  a_one_wqe_per_beat: assert property (@(posedge clk) SLOT_W * WQE_SEGS == DATA_W)
    else $error("queue_cache: a WQE must be one DMA beat");
endmodule
