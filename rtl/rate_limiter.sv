// rate_limiter: per-queue send allowance for the WQE parser.
//
// For every queue it keeps two numbers, the bytes already sent and the window size; a
// queue may send a work request of L bytes while already_sent + L <= window. A charge
// adds the bytes of an accepted work request to already_sent. A congestion-control block
// (none is built; the paper leaves the algorithm open) sets a queue's window and clears
// its already_sent through the cfg port. The two tables and the cfg port are the paper's
// ("tracks two data structures of each queue ... provides an interface to modify these
// data structures"); the comparison rule and the reset values (window all ones, that is
// unlimited, and nothing sent) are this design's choices.
// Timing: chk_ok is combinational; charge and cfg take effect at the clock edge, cfg
// first if both name the same queue in one cycle.
module rate_limiter #(
  parameter int unsigned NQ    = 256,
  parameter int unsigned CNT_W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(NQ)-1:0] chk_qpn,
  input  logic [CNT_W-1:0]      chk_len,
  output logic                  chk_ok,
  input  logic                  charge_valid,
  input  logic [$clog2(NQ)-1:0] charge_qpn,
  input  logic [CNT_W-1:0]      charge_len,
  input  logic                  cfg_valid,
  input  logic [$clog2(NQ)-1:0] cfg_qpn,
  input  logic [CNT_W-1:0]      cfg_window,
  output logic [CNT_W-1:0]      sent_of_chk     // already_sent of chk_qpn, for monitoring
);
  logic [CNT_W-1:0] already_sent [NQ];
  logic [CNT_W-1:0] window       [NQ];
  logic [CNT_W:0]   need;

  assign need        = {1'b0, already_sent[chk_qpn]} + {1'b0, chk_len};
  assign chk_ok      = need <= {1'b0, window[chk_qpn]};
  assign sent_of_chk = already_sent[chk_qpn];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) begin
        already_sent[q] <= '0;
        window[q]       <= '1;
      end
    end else begin
      if (charge_valid) already_sent[charge_qpn] <= already_sent[charge_qpn] + charge_len;
      if (cfg_valid) begin
        window[cfg_qpn]       <= cfg_window;
        already_sent[cfg_qpn] <= '0;
      end
    end
  end
endmodule
