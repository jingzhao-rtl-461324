// append_header: puts a header of HDR_BYTES bytes in front of a packet (Append Header).
//
// The header arrives on in_hdr together with the first payload beat. Every output beat is
// the HDR_BYTES bytes carried over from before (the header for the first beat, the top
// bytes of the previous payload beat afterwards) followed by the low 64-HDR_BYTES bytes of
// the current payload beat. When the last payload beat plus the carry no longer fit in one
// beat, one extra beat is sent with the remaining bytes. Throughput is one beat per clock
// with no bubble except that extra beat; latency is combinational (0 cycles) from input
// to output. The function and the 8-byte header of the paper's measurement come from the
// paper; the byte-shift datapath and the valid/ready handshake are this design's own.
module append_header
  import jz_pkg::*;
#(
  parameter int unsigned HDR_BYTES = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  beat_t                  in_beat,
  input  logic [8*HDR_BYTES-1:0] in_hdr,    // sampled with the first beat of a packet
  output logic                   out_valid,
  input  logic                   out_ready,
  output beat_t                  out_beat
);
  localparam int unsigned H = HDR_BYTES;
  localparam int unsigned B = BEAT_B;

  logic                 first;    // next input beat starts a packet
  logic                 flush;    // an extra beat with the carry is pending
  logic [8*H-1:0]       carry;
  logic [NBYTES_W-1:0]  flush_n;
  logic [8*H-1:0]       carry_src;
  logic [NBYTES_W:0]    total;    // carry + bytes of this beat

  assign carry_src = first ? in_hdr : carry;
  assign total     = (NBYTES_W+1)'(H) + {1'b0, in_beat.nbytes};
  assign in_ready  = !flush && out_ready;
  assign out_valid = flush || in_valid;

  always_comb begin
    if (flush) begin
      out_beat.data   = {{(DATA_W-8*H){1'b0}}, carry};
      out_beat.nbytes = flush_n;
      out_beat.last   = 1'b1;
    end else begin
      out_beat.data   = {in_beat.data[8*(B-H)-1:0], carry_src};
      if (in_beat.last && total <= (NBYTES_W+1)'(B)) begin
        out_beat.nbytes = NBYTES_W'(total);
        out_beat.last   = 1'b1;
      end else begin
        out_beat.nbytes = NBYTES_W'(B);
        out_beat.last   = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      first   <= 1'b1;
      flush   <= 1'b0;
      carry   <= '0;
      flush_n <= '0;
    end else if (flush) begin
      if (out_ready) begin
        flush <= 1'b0;
        first <= 1'b1;
      end
    end else if (in_valid && in_ready) begin
      carry <= in_beat.data[DATA_W-1 -: 8*H];
      if (in_beat.last) begin
        if (total > (NBYTES_W+1)'(B)) begin
          flush   <= 1'b1;
          flush_n <= NBYTES_W'(total - (NBYTES_W+1)'(B));
          first   <= 1'b0;
        end else begin
          first <= 1'b1;
        end
      end else begin
        first <= 1'b0;
      end
    end
  end

  a_nbytes: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (in_beat.nbytes != 0 && in_beat.nbytes <= NBYTES_W'(B) &&
                  (in_beat.last || in_beat.nbytes == NBYTES_W'(B))))
    else $error("append_header: only the last beat of a packet may be partial");
endmodule
