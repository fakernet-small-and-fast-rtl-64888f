// fnet_tcp_control: TCP connection state, stream pointers and retransmission.
//
// The outgoing data stream is described by three octet offsets into it:
// base (acknowledged by the PC), front (sent at least once) and avail
// (committed by the user, from the fill control), plus the receive window the
// PC last announced. Input-side updates (acknowledgements) and output-side
// updates (packets handed to the prepare FSM) only interact through the
// differences of these values. Whenever possible a packet request is offered
// to the TCP prepare FSM:
//   - after a SYN has been taken as template: one SYN-ACK without data;
//   - a pending retransmission: from base, up to the payload and window limits;
//   - new data: from front, as much as avail, the maximum payload and the
//     remaining window allow (rounded down to whole 32-bit words).
// A retransmission is requested after three ACKs at the same location (the
// first plus two duplicates) while data is outstanding, or when no ACK has
// been seen for twice the RTT estimate (counted in slow_tick periods); a
// timeout also raises the RTT estimate by one unit (saturating), so an
// abandoned connection decays to a trickle of retransmissions. The timeout
// also probes a zero window. RTT is measured with one running measurement:
// started when new data is sent, completed when an ACK covers its end,
// cancelled by any retransmission; samples go to fnet_rtt_filter whose result
// replaces the estimate.
// Interface: req_valid/req stay stable until req_take (one cycle). Sequence
// numbers are TCP_ISN for the SYN-ACK and TCP_ISN+1+offset for data.
// The pointers, the duplicate-ACK rule, the 2*RTT timeout, the +1 backoff and
// the filter are the paper's; the initial RTT estimate, the ISN and the exact
// moments the retransmit timer restarts are this design's choices.
//
// Retransmission lengths are limited by 16-bit payload and window
// values, so only the low half of the computed 32-bit length is used.
module fnet_tcp_control
  import fnet_pkg::*;
#(
  parameter logic [31:0] TCP_ISN  = 32'h0000_0000,
  parameter int          RTT_BITS = 16,
  parameter int          RTT_INIT = 100
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        tcp_reset,
  input  logic        slow_tick,
  // from the input FSM
  input  logic        syn_commit,
  input  logic        ack_commit,
  input  logic [31:0] ack_seq,
  input  logic [15:0] ack_win,
  // from the fill control
  input  logic [31:0] avail,
  // limits
  input  logic [15:0] cfg_max_payload,
  input  logic [15:0] cfg_win_limit,
  // to the TCP prepare FSM
  output logic        req_valid,
  output tcp_req_t    req,
  input  logic        req_take,
  // state
  output tcp_state_e  state,
  output logic [31:0] base,
  output logic [31:0] front,
  output logic [31:0] base_seq,
  output logic [31:0] front_seq,
  output logic [RTT_BITS-1:0] rtt_est,
  output logic        ev_retrans_dup,
  output logic        ev_retrans_timeout
);
  logic [15:0]         window;
  logic                synack_pending, retrans_pending;
  logic [1:0]          dup_cnt;
  logic [RTT_BITS:0]   rtt_timer;
  logic                measuring;
  logic [31:0]         rtt_mark;
  logic [RTT_BITS-1:0] rtt_cnt;
  logic                filt_valid;
  logic [RTT_BITS-1:0] filt_value;
  logic                sample_valid;
  logic [RTT_BITS-1:0] sample;

  fnet_rtt_filter #(.W(RTT_BITS)) u_filter (
    .clk, .rst(rst || tcp_reset), .in_valid(sample_valid), .in_sample(sample),
    .out_valid(filt_valid), .out_value(filt_value)
  );

  assign base_seq  = TCP_ISN + 32'd1 + base;
  assign front_seq = TCP_ISN + 32'd1 + front;

  // ---------------------------------------------------------------- request
  function automatic logic [31:0] min3(input logic [31:0] a, input logic [31:0] b, input logic [31:0] c);
    logic [31:0] m;
    m = (a < b) ? a : b;
    return (m < c) ? m : c;
  endfunction

  logic [31:0] lim, inflight, new_len, re_len;
  always_comb begin
    lim      = {16'd0, (window < cfg_win_limit) ? window : cfg_win_limit};
    inflight = front - base;
    re_len   = min3(avail - base, {16'd0, cfg_max_payload}, lim) & ~32'd3;
    new_len  = (inflight < lim) ? (min3(avail - front, {16'd0, cfg_max_payload}, lim - inflight) & ~32'd3) : 32'd0;
    req_valid = 1'b0;
    req       = '0;
    if (state == TCP_SYN_RCVD && synack_pending) begin
      req_valid   = 1'b1;
      req.flags   = TCP_SYN | TCP_ACK;
    end else if (state == TCP_ESTAB && retrans_pending) begin
      req_valid   = 1'b1;
      req.start   = base;
      req.len     = re_len[15:0];
      req.flags   = TCP_ACK | TCP_PSH;
      req.retrans = 1'b1;
    end else if (state == TCP_ESTAB && new_len != 32'd0) begin
      req_valid   = 1'b1;
      req.start   = front;
      req.len     = new_len[15:0];
      req.flags   = TCP_ACK | TCP_PSH;
    end
  end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk) begin
    logic [31:0] ack_off;
    ev_retrans_dup     <= 1'b0;
    ev_retrans_timeout <= 1'b0;
    sample_valid       <= 1'b0;
    ack_off = ack_seq - TCP_ISN - 32'd1;

    if (syn_commit && state == TCP_CLOSED) begin
      state          <= TCP_SYN_RCVD;
      synack_pending <= 1'b1;
    end

    if (slow_tick) begin
      if (!rtt_timer[RTT_BITS]) rtt_timer <= rtt_timer + 1'b1;
      if (measuring && rtt_cnt != '1) rtt_cnt <= rtt_cnt + 1'b1;
    end

    if (ack_commit && state != TCP_CLOSED) begin
      window    <= ack_win;
      rtt_timer <= '0;
      if (state == TCP_SYN_RCVD) begin
        if (ack_off == 32'd0 && !synack_pending) state <= TCP_ESTAB;
      end else if (ack_off != base) begin
        base    <= ack_off;
        dup_cnt <= 2'd0;
      end else if (front != base) begin
        if (dup_cnt == 2'd1) begin
          dup_cnt         <= 2'd0;
          retrans_pending <= 1'b1;
          ev_retrans_dup  <= 1'b1;
        end else dup_cnt <= dup_cnt + 2'd1;
      end
      if (measuring && (ack_off - rtt_mark) < 32'h8000_0000) begin
        measuring    <= 1'b0;
        sample_valid <= 1'b1;
        sample       <= rtt_cnt;
      end
    end else if (state == TCP_ESTAB && !retrans_pending &&
                 rtt_timer >= {rtt_est, 1'b0} &&
                 (front != base || (window == 16'd0 && avail != base))) begin
      retrans_pending    <= 1'b1;
      ev_retrans_timeout <= 1'b1;
      rtt_timer          <= '0;
      if (rtt_est != '1) rtt_est <= rtt_est + 1'b1;
    end

    if (filt_valid) rtt_est <= (filt_value == '0) ? RTT_BITS'(1) : filt_value;

    if (req_take && req_valid) begin
      if (req.flags[1]) synack_pending <= 1'b0;   // SYN
      else if (req.retrans) begin
        retrans_pending <= 1'b0;
        measuring       <= 1'b0;
        if ({16'd0, req.len} > front - base) front <= base + {16'd0, req.len};
      end else begin
        front <= front + {16'd0, req.len};
        if (front == base) rtt_timer <= '0;
        if (!measuring) begin
          measuring <= 1'b1;
          rtt_mark  <= front + {16'd0, req.len};
          rtt_cnt   <= '0;
        end
      end
    end

    if (rst || tcp_reset) begin
      state           <= TCP_CLOSED;
      synack_pending  <= 1'b0;
      retrans_pending <= 1'b0;
      base            <= 32'd0;
      front           <= 32'd0;
      window          <= 16'd0;
      dup_cnt         <= 2'd0;
      rtt_timer       <= '0;
      measuring       <= 1'b0;
      rtt_mark        <= 32'd0;
      rtt_cnt         <= '0;
      sample          <= '0;
      sample_valid    <= 1'b0;
    end
    if (rst) rtt_est <= RTT_BITS'(RTT_INIT);
  end

  // the acknowledged point never passes the send front
  a_base_le_front: assert property (@(posedge clk) disable iff (rst) (front - base) <= (avail - base));
endmodule
