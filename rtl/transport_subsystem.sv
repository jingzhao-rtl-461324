// transport_subsystem: reliable delivery of packets over a lossy link (Transport Subsystem).
//
// SendControl
//  * InOrderInject: packets from the semantics subsystem are stored in an egress
//    dynamic_buffer and numbered in order (PSN). A packet is taken only while fewer than
//    WIN packets are unacknowledged.
//  * Request Arbiter: the link is given to, in order of priority, a control packet
//    (ACK/NAK of the receive side), a retransmission, a new packet.
//  * Selective Repeat / Go-Back-N: a NAK for PSN e, or a timeout on the oldest
//    unacknowledged packet e, schedules a retransmission of e alone (SR) or of e up to the
//    last packet sent (GBN, parameter GBN=1). Retransmissions read the packet out of the
//    dynamic buffer again; a cumulative ACK deletes the acknowledged packets from it.
//  * Timer Control: one timer for the oldest unacknowledged packet; it restarts whenever
//    the acknowledged point moves and fires after TIMEOUT clocks without progress.
// RecvControl
//  * OutOfOrder Accept (SR): a DATA packet inside the receive window is stored in an
//    ingress dynamic_buffer even if earlier ones are missing; with GBN only the expected
//    PSN is stored (InOrder Accept). Duplicates, packets outside the window and packets
//    arriving when the buffer has no room for a maximum-size packet are dropped; an
//    out-of-order packet also leaves room for the expected one (else the buffer could
//    fill with packets that can never be committed).
//  * InOrder Commit: stored packets are read out and deleted in PSN order and passed up.
//  * Every commit requests a cumulative ACK; a gap with later packets stored requests one
//    NAK for the missing PSN (repeated only after the expected PSN has moved on).
//
// Interface and timing:
//  * tx_in_*  : packets to send, beat_t stream (valid/ready).
//  * link_tx_*: packets to the link, beat_t plus ts_hdr_t sideband held for the packet.
//    A control packet is one beat with nbytes = 0.
//  * link_rx_*: packets from the link, same format; loss or reordering is the link's.
//  * rx_out_* : received packets, in order, exactly once.
//  * stat_*   : event counters (new packets, retransmissions, timeouts, ACK/NAK received,
//    packets stored out of order, packets dropped, duplicates).
// Follows the paper: the SendControl/RecvControl split and block names of its figure, SR
// as default with GBN as the alternative, dynamic buffers of 32 x 512-bit entries. This
// design's choices: one reliable connection, PSN width 16, WIN = 16, a single timer,
// the link sideband header, the ACK-per-commit policy, the last beat's byte count being
// stored next to its data in the buffer.
module transport_subsystem
  import jz_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 32,
  parameter int unsigned WIN       = 16,
  parameter int unsigned TIMEOUT   = 2048,
  parameter int unsigned MAX_BEATS = 9,   // beats of the largest packet (512 B + headers)
  parameter bit          GBN       = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the semantics subsystem
  input  logic        tx_in_valid,
  output logic        tx_in_ready,
  input  beat_t       tx_in_beat,
  // link transmit
  output logic        link_tx_valid,
  input  logic        link_tx_ready,
  output beat_t       link_tx_beat,
  output ts_hdr_t     link_tx_hdr,
  // link receive
  input  logic        link_rx_valid,
  output logic        link_rx_ready,
  input  beat_t       link_rx_beat,
  input  ts_hdr_t     link_rx_hdr,
  // to the semantics subsystem
  output logic        rx_out_valid,
  input  logic        rx_out_ready,
  output beat_t       rx_out_beat,
  // statistics
  output logic [31:0] stat_tx_new,
  output logic [31:0] stat_retx,
  output logic [31:0] stat_timeouts,
  output logic [31:0] stat_ack_rx,
  output logic [31:0] stat_nak_rx,
  output logic [31:0] stat_ooo,
  output logic [31:0] stat_drop,
  output logic [31:0] stat_dup
);
  localparam int unsigned HW = $clog2(BUF_DEPTH);
  localparam int unsigned WW = $clog2(WIN);
  localparam int unsigned BW = DATA_W + NBYTES_W;   // stored: data and byte count
  typedef logic [15:0] psn_t;
  typedef logic [HW-1:0] hdl_t;

  function automatic logic [WW-1:0] wi(input psn_t p);
    return p[WW-1:0];
  endfunction

  // =====================================================================
  // SendControl
  // =====================================================================
  logic tb_ins_valid, tb_ins_ready, tb_ins_done;
  hdl_t tb_ins_handle;
  logic tb_cmd_valid, tb_cmd_ready, tb_cmd_release, tb_cmd_emit, tb_cmd_done;
  hdl_t tb_cmd_handle;
  logic tb_out_valid, tb_out_ready, tb_out_last;
  logic [BW-1:0] tb_out_data;
  logic [HW:0] tb_free;

  dynamic_buffer #(.DATA_W(BW), .DEPTH(BUF_DEPTH)) u_txbuf (
    .clk, .rst_n,
    .ins_valid(tb_ins_valid), .ins_ready(tb_ins_ready),
    .ins_data({tx_in_beat.data, tx_in_beat.nbytes}), .ins_last(tx_in_beat.last),
    .ins_done(tb_ins_done), .ins_handle(tb_ins_handle),
    .cmd_valid(tb_cmd_valid), .cmd_ready(tb_cmd_ready), .cmd_handle(tb_cmd_handle),
    .cmd_emit(tb_cmd_emit), .cmd_release(tb_cmd_release), .cmd_done(tb_cmd_done),
    .out_valid(tb_out_valid), .out_ready(tb_out_ready), .out_data(tb_out_data),
    .out_last(tb_out_last), .free_count(tb_free));

  // PSN pointers: una <= acked <= nxt <= stored <= taken
  psn_t snd_una;      // oldest packet still in the egress buffer
  psn_t snd_acked;    // every PSN below is acknowledged
  psn_t snd_nxt;      // next PSN to send for the first time
  psn_t snd_stored;   // packets whose insertion has completed
  psn_t snd_taken;    // packets whose last beat has been taken
  psn_t rs_ptr, rs_end;   // retransmission range [rs_ptr, rs_end)
  hdl_t tx_handle [WIN];
  logic ins_mid;
  logic [$clog2(TIMEOUT+1)-1:0] timer;

  logic room;
  assign room         = psn_t'(snd_taken - snd_una) < psn_t'(WIN);
  assign tb_ins_valid = tx_in_valid && (ins_mid || room);
  assign tx_in_ready  = tb_ins_ready && (ins_mid || room);

  // =====================================================================
  // RecvControl
  // =====================================================================
  logic rb_ins_valid, rb_ins_ready, rb_ins_done;
  hdl_t rb_ins_handle;
  logic rb_cmd_valid, rb_cmd_ready, rb_cmd_done;
  hdl_t rb_cmd_handle;
  logic rb_out_valid, rb_out_last;
  logic [BW-1:0] rb_out_data;
  logic [HW:0] rb_free;

  dynamic_buffer #(.DATA_W(BW), .DEPTH(BUF_DEPTH)) u_rxbuf (
    .clk, .rst_n,
    .ins_valid(rb_ins_valid), .ins_ready(rb_ins_ready),
    .ins_data({link_rx_beat.data, link_rx_beat.nbytes}), .ins_last(link_rx_beat.last),
    .ins_done(rb_ins_done), .ins_handle(rb_ins_handle),
    .cmd_valid(rb_cmd_valid), .cmd_ready(rb_cmd_ready), .cmd_handle(rb_cmd_handle),
    .cmd_emit(1'b1), .cmd_release(1'b1), .cmd_done(rb_cmd_done),
    .out_valid(rb_out_valid), .out_ready(rx_out_ready), .out_data(rb_out_data),
    .out_last(rb_out_last), .free_count(rb_free));

  assign rx_out_valid       = rb_out_valid;
  assign rx_out_beat.data   = rb_out_data[BW-1:NBYTES_W];
  assign rx_out_beat.nbytes = rb_out_data[NBYTES_W-1:0];
  assign rx_out_beat.last   = rb_out_last;

  psn_t rcv_nxt;              // next PSN to commit
  logic [WIN-1:0] have;       // slot reserved by a packet being or already stored
  logic [WIN-1:0] stored;     // packet completely stored
  hdl_t rx_handle [WIN];
  logic rx_mid, rx_store;     // inside a packet; that packet is being stored
  psn_t rx_psn;
  logic ack_pend, nak_pend, nak_sent;

  // classification of the first beat of a received packet
  psn_t rx_d;
  logic rx_is_data, rx_dup, rx_in_win, rx_accept;
  assign rx_is_data = link_rx_hdr.ptype == PKT_DATA;
  assign rx_d       = link_rx_hdr.psn - rcv_nxt;
  assign rx_in_win  = rx_d < psn_t'(WIN);
  assign rx_dup     = !rx_in_win || have[wi(link_rx_hdr.psn)];
  assign rx_accept  = rx_in_win && !have[wi(link_rx_hdr.psn)] &&
                      (!GBN || rx_d == '0) &&
                      (rb_free >= (HW+1)'(rx_d == '0 ? MAX_BEATS : 2 * MAX_BEATS));

  // beats are stored only for an accepted data packet; all else is consumed at once
  logic rx_store_now;
  assign rx_store_now  = rx_mid ? rx_store : (rx_is_data && rx_accept);
  assign rb_ins_valid  = link_rx_valid && rx_store_now;
  assign link_rx_ready = rx_store_now ? rb_ins_ready : 1'b1;

  // InOrder Commit
  assign rb_cmd_valid  = stored[wi(rcv_nxt)];
  assign rb_cmd_handle = rx_handle[wi(rcv_nxt)];

  // a gap: the expected packet is absent while a later one is present
  logic gap;
  assign gap = !have[wi(rcv_nxt)] && (have != '0);

  // control packet received
  logic ctl_rx, ack_ok;
  assign ctl_rx = link_rx_valid && !rx_mid && !rx_is_data;
  assign ack_ok = psn_t'(link_rx_hdr.psn - snd_acked) <= psn_t'(snd_nxt - snd_acked);

  // =====================================================================
  // Request Arbiter and transmit FSM
  // =====================================================================
  typedef enum logic [1:0] {T_IDLE, T_CTRL, T_DATA} tstate_e;
  tstate_e tstate;
  psn_t    tx_psn;
  logic    sel_ctrl, sel_retx, sel_new, sel_rel;
  logic    retx_live;

  assign retx_live = (rs_ptr != rs_end) && psn_t'(rs_ptr - snd_acked) < psn_t'(snd_nxt - snd_acked);
  assign sel_ctrl  = (tstate == T_IDLE) && (ack_pend || nak_pend);
  assign sel_rel   = (tstate == T_IDLE) && !sel_ctrl && (snd_una != snd_acked);
  assign sel_retx  = (tstate == T_IDLE) && !sel_ctrl && !sel_rel && retx_live;
  assign sel_new   = (tstate == T_IDLE) && !sel_ctrl && !sel_rel && !retx_live &&
                     (snd_nxt != snd_stored);

  assign tb_cmd_valid   = sel_rel || sel_retx || sel_new;
  assign tb_cmd_emit    = !sel_rel;
  assign tb_cmd_release = sel_rel;
  assign tb_cmd_handle  = tx_handle[wi(sel_rel ? snd_una : sel_retx ? rs_ptr : snd_nxt)];

  always_comb begin
    link_tx_valid      = 1'b0;
    link_tx_beat       = '0;
    link_tx_hdr.ptype  = PKT_DATA;
    link_tx_hdr.psn    = tx_psn;
    tb_out_ready       = 1'b0;
    if (tstate == T_CTRL) begin
      link_tx_valid      = 1'b1;
      link_tx_beat.last  = 1'b1;
      link_tx_hdr.ptype  = nak_pend ? PKT_NAK : PKT_ACK;
      link_tx_hdr.psn    = rcv_nxt;
    end else if (tstate == T_DATA) begin
      link_tx_valid      = tb_out_valid;
      link_tx_beat.data  = tb_out_data[BW-1:NBYTES_W];
      link_tx_beat.nbytes = tb_out_data[NBYTES_W-1:0];
      link_tx_beat.last  = tb_out_last;
      tb_out_ready       = link_tx_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tstate        <= T_IDLE;
      tx_psn        <= '0;
      snd_una       <= '0;
      snd_acked     <= '0;
      snd_nxt       <= '0;
      snd_stored    <= '0;
      snd_taken     <= '0;
      rs_ptr        <= '0;
      rs_end        <= '0;
      ins_mid       <= 1'b0;
      timer         <= '0;
      rcv_nxt       <= '0;
      have          <= '0;
      stored        <= '0;
      rx_mid        <= 1'b0;
      rx_store      <= 1'b0;
      rx_psn        <= '0;
      ack_pend      <= 1'b0;
      nak_pend      <= 1'b0;
      nak_sent      <= 1'b0;
      stat_tx_new   <= '0;
      stat_retx     <= '0;
      stat_timeouts <= '0;
      stat_ack_rx   <= '0;
      stat_nak_rx   <= '0;
      stat_ooo      <= '0;
      stat_drop     <= '0;
      stat_dup      <= '0;
      for (int i = 0; i < WIN; i++) begin
        tx_handle[i] <= '0;
        rx_handle[i] <= '0;
      end
    end else begin
      // ---------------- InOrderInject ----------------
      if (tb_ins_valid && tb_ins_ready) begin
        ins_mid <= !tx_in_beat.last;
        if (tx_in_beat.last) snd_taken <= snd_taken + 1'b1;
      end
      if (tb_ins_done) begin
        tx_handle[wi(snd_stored)] <= tb_ins_handle;
        snd_stored <= snd_stored + 1'b1;
      end

      // ---------------- transmit FSM ----------------
      unique case (tstate)
        T_IDLE: begin
          if (sel_ctrl) tstate <= T_CTRL;
          else if (tb_cmd_ready) begin
            if (sel_rel) begin
              snd_una <= snd_una + 1'b1;
            end else if (sel_retx) begin
              tx_psn    <= rs_ptr;
              rs_ptr    <= rs_ptr + 1'b1;
              stat_retx <= stat_retx + 1;
              tstate    <= T_DATA;
            end else if (sel_new) begin
              tx_psn      <= snd_nxt;
              snd_nxt     <= snd_nxt + 1'b1;
              stat_tx_new <= stat_tx_new + 1;
              tstate      <= T_DATA;
            end
          end
        end
        T_CTRL: if (link_tx_ready) begin
          ack_pend <= 1'b0;
          nak_pend <= 1'b0;
          tstate   <= T_IDLE;
        end
        T_DATA: if (tb_out_valid && tb_out_ready && tb_out_last) tstate <= T_IDLE;
        default: tstate <= T_IDLE;
      endcase
      if (retx_live == 1'b0 && rs_ptr != rs_end) rs_ptr <= rs_end;   // range acknowledged

      // ---------------- ACK / NAK processing and Timer Control ----------------
      if (snd_acked == snd_nxt) timer <= '0;
      else if (timer == ($clog2(TIMEOUT+1))'(TIMEOUT)) begin
        timer         <= '0;
        stat_timeouts <= stat_timeouts + 1;
        rs_ptr        <= snd_acked;
        rs_end        <= GBN ? snd_nxt : snd_acked + 1'b1;
      end else timer <= timer + 1'b1;
      if (ctl_rx) begin
        if (link_rx_hdr.ptype == PKT_ACK) stat_ack_rx <= stat_ack_rx + 1;
        else                              stat_nak_rx <= stat_nak_rx + 1;
        if (ack_ok) begin
          if (link_rx_hdr.psn != snd_acked) timer <= '0;
          snd_acked <= link_rx_hdr.psn;
          if (link_rx_hdr.ptype == PKT_NAK && link_rx_hdr.psn != snd_nxt) begin
            rs_ptr <= link_rx_hdr.psn;
            rs_end <= GBN ? snd_nxt : link_rx_hdr.psn + 1'b1;
            timer  <= '0;
          end
        end
      end

      // ---------------- OutOfOrder Accept ----------------
      if (link_rx_valid && link_rx_ready) begin
        if (!rx_mid && rx_is_data) begin
          rx_store <= rx_accept;
          rx_psn   <= link_rx_hdr.psn;
          if (rx_accept) begin
            have[wi(link_rx_hdr.psn)] <= 1'b1;
            if (rx_d != '0) stat_ooo <= stat_ooo + 1;
          end else if (rx_dup) begin
            stat_dup <= stat_dup + 1;
            ack_pend <= 1'b1;          // tell the sender again where we are
          end else begin
            stat_drop <= stat_drop + 1;
            if (!nak_sent) begin     // out of order (GBN) or no room: ask for it again
              nak_pend <= 1'b1;
              nak_sent <= 1'b1;
            end
          end
        end
        rx_mid <= !link_rx_beat.last;
      end
      if (rb_ins_done) begin
        stored[wi(rx_psn)]    <= 1'b1;
        rx_handle[wi(rx_psn)] <= rb_ins_handle;
      end

      // ---------------- InOrder Commit ----------------
      if (rb_cmd_valid && rb_cmd_ready) begin
        have[wi(rcv_nxt)]   <= 1'b0;
        stored[wi(rcv_nxt)] <= 1'b0;
        rcv_nxt             <= rcv_nxt + 1'b1;
        ack_pend            <= 1'b1;
        nak_sent            <= 1'b0;
      end else if (gap && !nak_sent) begin
        nak_pend <= 1'b1;
        nak_sent <= 1'b1;
      end
    end
  end

  a_ins_no_stall: assert property (@(posedge clk) disable iff (!rst_n)
    rb_ins_valid |-> rb_ins_ready || !rx_mid)
    else $error("transport_subsystem: ingress buffer ran out in a packet");
endmodule
