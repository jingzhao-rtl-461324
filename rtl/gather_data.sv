// gather_data: reads one buffer of host memory by DMA and delivers it as a packet of
// byte-packed beats, whatever the buffer's byte alignment (Gather primitive).
//
// A command {addr, len} becomes one DMA read of the enclosing 64-byte-aligned range. The
// returned beats are shifted down by addr mod 64 bytes: output beat j is formed from input
// beats j and j+1, so each input beat from the second on yields one output beat, and a
// final flush beat is sent when the last output beat lies wholly in the last input beat.
// Bytes beyond len in the last beat are zero.
//
// Interface and timing:
//  * cmd_valid/cmd_ready, cmd_addr, cmd_len (1..65535 - 63 bytes): accepted when idle.
//  * dma_rd_*: the aligned read; dma_rsp_*: its beats in order (beat_t, only data used).
//  * out_*: beat_t stream, last on the final beat, nbytes counting valid bytes.
// One input beat is consumed per clock while out_ready is high.
// The paper names Scatter/Gather as a reusable primitive and gives its function (move a
// payload between a packet and host buffers); this realignment datapath is this design's.
module gather_data
  import jz_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic [LEN_W-1:0]  cmd_len,
  output logic              dma_rd_valid,
  input  logic              dma_rd_ready,
  output logic [ADDR_W-1:0] dma_rd_addr,
  output logic [LEN_W-1:0]  dma_rd_len,
  input  logic              dma_rsp_valid,
  output logic              dma_rsp_ready,
  input  beat_t             dma_rsp_beat,
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_beat
);
  typedef enum logic [1:0] {G_IDLE, G_REQ, G_DATA, G_FLUSH} state_e;
  state_e state;
  logic [5:0]        off;
  logic [LEN_W-1:0]  len;
  logic [LEN_W-1:0]  nin, nout, in_idx, out_idx;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] prev;

  logic [LEN_W:0] span;
  assign span = {1'b0, LEN_W'(cmd_addr[5:0])} + {1'b0, cmd_len} + (LEN_W+1)'(63);

  assign cmd_ready    = (state == G_IDLE);
  assign dma_rd_valid = (state == G_REQ);
  assign dma_rd_addr  = {addr[ADDR_W-1:6], 6'd0};
  assign dma_rd_len   = LEN_W'({nin, 6'd0});

  // output beat j from prev (input j) and the current input (j + 1)
  logic [2*DATA_W-1:0] pair;
  logic [DATA_W-1:0]   shifted;
  logic                emit;
  logic [LEN_W-1:0]    tail;
  assign pair    = {(state == G_FLUSH) ? '0 : dma_rsp_beat.data, prev};
  assign shifted = DATA_W'(pair >> {off, 3'd0});
  assign emit    = (state == G_FLUSH) || (state == G_DATA && dma_rsp_valid && in_idx != '0);
  assign tail    = len - {out_idx[LEN_W-7:0], 6'd0};

  always_comb begin
    out_valid       = emit;
    out_beat.last   = (out_idx == nout - 1'b1);
    out_beat.nbytes = out_beat.last ? ((tail[6:0] == 7'd0 || tail > LEN_W'(64)) ? 7'd64 : tail[6:0])
                                    : 7'd64;
    out_beat.data   = shifted;
    for (int b = 0; b < BEAT_B; b++)
      if (out_beat.last && b >= int'(out_beat.nbytes)) out_beat.data[8*b +: 8] = 8'h00;
  end
  assign dma_rsp_ready = (state == G_DATA) && (in_idx == '0 || out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= G_IDLE;
      off     <= '0;
      len     <= '0;
      nin     <= '0;
      nout    <= '0;
      in_idx  <= '0;
      out_idx <= '0;
      addr    <= '0;
      prev    <= '0;
    end else begin
      unique case (state)
        G_IDLE: if (cmd_valid) begin
          addr    <= cmd_addr;
          off     <= cmd_addr[5:0];
          len     <= cmd_len;
          nin     <= LEN_W'(span >> 6);
          nout    <= LEN_W'(({1'b0, cmd_len} + (LEN_W+1)'(63)) >> 6);
          in_idx  <= '0;
          out_idx <= '0;
          state   <= G_REQ;
        end
        G_REQ: if (dma_rd_ready) state <= G_DATA;
        G_DATA: if (dma_rsp_valid && dma_rsp_ready) begin
          prev   <= dma_rsp_beat.data;
          in_idx <= in_idx + 1'b1;
          if (emit) out_idx <= out_idx + 1'b1;
          if (in_idx == nin - 1'b1) state <= (nout == nin) ? G_FLUSH : G_IDLE;
        end
        G_FLUSH: if (out_ready) begin
          out_idx <= out_idx + 1'b1;
          state   <= G_IDLE;
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> cmd_len != '0) else $error("gather_data: zero length");
endmodule
