// wqe_parser: decodes one work queue element into sub-WQEs, one per scatter/gather
// element, after asking the rate limiter whether the queue may send that much.
//
// WQE layout (64 bytes, this design's own; the paper leaves the format to the protocol):
//   bytes  0..15  header:  [7:0] opcode, [15:8] number of SGEs (1..3), [63:32] rkey,
//                          [127:64] remote address
//   bytes 16..63  three SGEs of 16 bytes: [63:0] local address, [95:64] lkey,
//                          [127:96] length in bytes
// The parser adds up the SGE lengths and checks them against the rate limiter. If the
// queue may send, it charges the rate limiter and emits the SGEs as a stream of sub-WQEs,
// the remote address advancing by each SGE's length, the last one flagged; done then
// pulses with consumed = 1. If the queue may not send, done pulses at once with
// consumed = 0 and the scheduler keeps the WQE for a later round. Emitting the addresses
// "in a stream manner" and the rate-limiter query are the paper's; the rest is this
// design's.
// Timing: one sub-WQE per clock under out_ready; done in the clock after the last one.
module wqe_parser
  import jz_pkg::*;
#(
  parameter int unsigned NQ = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [DATA_W-1:0]     in_wqe,
  input  logic [15:0]           in_qpn,
  // rate limiter
  output logic [$clog2(NQ)-1:0] rl_qpn,
  output logic [31:0]           rl_len,
  input  logic                  rl_ok,
  output logic                  rl_charge,
  // sub-WQEs
  output logic                  out_valid,
  input  logic                  out_ready,
  output sub_wqe_t              out_sub,
  output logic                  done,
  output logic                  done_consumed
);
  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_EMIT} state_e;
  state_e          state;
  logic [DATA_W-1:0] wqe;
  logic [15:0]     qpn;
  logic [1:0]      k;          // SGE being emitted
  logic [63:0]     raddr_acc;
  logic [7:0]      nsge;
  logic [31:0]     total;

  function automatic logic [127:0] sge(input logic [DATA_W-1:0] w, input logic [1:0] i);
    return w[128 * (int'(i) + 1) +: 128];
  endfunction

  assign nsge = wqe[15:8];
  always_comb begin
    total = '0;
    for (int i = 0; i < 3; i++)
      if (8'(i) < nsge) total = total + wqe[128 * (i + 1) + 96 +: 32];
  end

  assign in_ready  = (state == S_IDLE);
  assign rl_qpn    = qpn[$clog2(NQ)-1:0];
  assign rl_len    = total;
  assign rl_charge = (state == S_CHECK) && rl_ok && nsge != 0;
  assign out_valid = (state == S_EMIT);

  always_comb begin
    logic [127:0] s;
    s = sge(wqe, k);
    out_sub.qpn      = qpn;
    out_sub.opcode   = rdma_op_e'(wqe[3:0]);
    out_sub.last_sge = (8'(k) == nsge - 8'd1);
    out_sub.lkey     = s[95:64];
    out_sub.laddr    = s[63:0];
    out_sub.len      = s[127:96];
    out_sub.rkey     = wqe[63:32];
    out_sub.raddr    = raddr_acc;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      wqe           <= '0;
      qpn           <= '0;
      k             <= '0;
      raddr_acc     <= '0;
      done          <= 1'b0;
      done_consumed <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          wqe   <= in_wqe;
          qpn   <= in_qpn;
          state <= S_CHECK;
        end
        S_CHECK: begin
          k         <= '0;
          raddr_acc <= wqe[127:64];
          if (nsge == 0) begin
            // nothing to send: consumed as a no-op
            done <= 1'b1; done_consumed <= 1'b1; state <= S_IDLE;
          end else if (rl_ok) begin
            state <= S_EMIT;
          end else begin
            done <= 1'b1; done_consumed <= 1'b0; state <= S_IDLE;
          end
        end
        S_EMIT: if (out_ready) begin
          raddr_acc <= raddr_acc + 64'(out_sub.len);
          k         <= k + 1'b1;
          if (out_sub.last_sge) begin
            done <= 1'b1; done_consumed <= 1'b1; state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_nsge: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_CHECK) |-> nsge <= 8'd3) else $error("wqe_parser: more than 3 SGEs");
endmodule
