// remove_header: strips the first HDR_BYTES bytes of a packet (Remove Header).
//
// The first beat's low HDR_BYTES bytes are the header; they are shown on out_hdr with
// every payload beat of the packet. The payload is realigned to byte 0: each output beat is
// the 64-HDR_BYTES bytes held from the previous input beat followed by the low HDR_BYTES
// bytes of the current one. The first input beat of a multi-beat packet produces no output
// (one bubble per packet); a final extra beat is sent when the held bytes do not fit into
// the last output beat. The function and the 8-byte header of the paper's measurement come
// from the paper; the datapath and the handshake are this design's own. A packet must be
// longer than its header.
module remove_header
  import jz_pkg::*;
#(
  parameter int unsigned HDR_BYTES = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  beat_t                  in_beat,
  output logic                   out_valid,
  input  logic                   out_ready,
  output beat_t                  out_beat,
  output logic [8*HDR_BYTES-1:0] out_hdr
);
  localparam int unsigned H = HDR_BYTES;
  localparam int unsigned B = BEAT_B;

  typedef enum logic [1:0] {S_FIRST, S_MID, S_FLUSH} state_e;
  state_e               state;
  logic [8*(B-H)-1:0]   held;
  logic [8*H-1:0]       hdr_q;
  logic [NBYTES_W-1:0]  flush_n;

  assign out_hdr = (state == S_FIRST) ? in_beat.data[8*H-1:0] : hdr_q;

  always_comb begin
    out_valid       = 1'b0;
    in_ready        = 1'b0;
    out_beat.data   = '0;
    out_beat.nbytes = '0;
    out_beat.last   = 1'b0;
    unique case (state)
      S_FIRST: begin
        // a single-beat packet goes straight through; otherwise the beat is only held
        out_beat.data   = {{(8*H){1'b0}}, in_beat.data[DATA_W-1:8*H]};
        out_beat.nbytes = in_beat.nbytes - NBYTES_W'(H);
        out_beat.last   = 1'b1;
        out_valid       = in_valid && in_beat.last;
        in_ready        = in_beat.last ? out_ready : 1'b1;
      end
      S_MID: begin
        out_beat.data = {in_beat.data[8*H-1:0], held};
        if (in_beat.last && in_beat.nbytes <= NBYTES_W'(H)) begin
          out_beat.nbytes = NBYTES_W'(B - H) + in_beat.nbytes;
          out_beat.last   = 1'b1;
        end else begin
          out_beat.nbytes = NBYTES_W'(B);
        end
        out_valid = in_valid;
        in_ready  = out_ready;
      end
      S_FLUSH: begin
        out_beat.data   = {{(8*H){1'b0}}, held};
        out_beat.nbytes = flush_n;
        out_beat.last   = 1'b1;
        out_valid       = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_FIRST;
      held    <= '0;
      hdr_q   <= '0;
      flush_n <= '0;
    end else begin
      unique case (state)
        S_FIRST: if (in_valid && in_ready) begin
          hdr_q <= in_beat.data[8*H-1:0];
          held  <= in_beat.data[DATA_W-1:8*H];
          if (!in_beat.last) state <= S_MID;
        end
        S_MID: if (in_valid && in_ready) begin
          held <= in_beat.data[DATA_W-1:8*H];
          if (in_beat.last) begin
            if (in_beat.nbytes > NBYTES_W'(H)) begin
              state   <= S_FLUSH;
              flush_n <= in_beat.nbytes - NBYTES_W'(H);
            end else begin
              state <= S_FIRST;
            end
          end
        end
        S_FLUSH: if (out_ready) state <= S_FIRST;
        default: state <= S_FIRST;
      endcase
    end
  end

  a_longer_than_header: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && state == S_FIRST && in_beat.last) |-> in_beat.nbytes > NBYTES_W'(H))
    else $error("remove_header: packet not longer than its header");
endmodule
