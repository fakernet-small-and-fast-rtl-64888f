// tb_fnet_tcp_control: drives the TCP control with a SYN, ACKs, growing
// 'avail' and slow ticks, and takes its packet requests like the prepare FSM.
// Checks: one SYN-ACK per connection; ESTAB after the ACK of the SYN-ACK;
// new-data requests start at 'front', are word multiples, and never exceed
// the payload limit, the window or the committed data; a retransmission
// after the first ACK plus two duplicates and after 2*RTT slow ticks without
// ACK, starting at 'base'; the RTT estimate rising by one on a timeout and
// being replaced by the filter result after sixteen measurements; a zero
// window probed only on timeout; and that a TCP reset closes the connection.
module tb_fnet_tcp_control;
  import fnet_pkg::*;
  localparam logic [31:0] ISN = 32'h0000_0000;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        tcp_reset = 0, slow_tick = 0, syn_commit = 0, ack_commit = 0;
  logic [31:0] ack_seq = 0, avail = 0;
  logic [15:0] ack_win = 0, cfg_max_payload = 16'd1440, cfg_win_limit = 16'hFFFF;
  logic        req_valid, req_take = 0;
  tcp_req_t    req;
  tcp_state_e  state;
  logic [31:0] base, front, base_seq, front_seq;
  logic [15:0] rtt_est;
  logic        ev_retrans_dup, ev_retrans_timeout;
  int checks = 0, failures = 0;
  int n_syn = 0, n_new = 0, n_re = 0, n_dup = 0, n_to = 0;
  logic [31:0] last_re_start;
  int          last_len;
  bit          auto_take = 1;

  fnet_tcp_control #(.TCP_ISN(ISN)) dut (.clk, .rst, .tcp_reset, .slow_tick, .syn_commit,
    .ack_commit, .ack_seq, .ack_win, .avail, .cfg_max_payload, .cfg_win_limit, .req_valid, .req,
    .req_take, .state, .base, .front, .base_seq, .front_seq, .rtt_est, .ev_retrans_dup,
    .ev_retrans_timeout);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  // prepare FSM model: takes a valid request now and then and checks it
  logic [15:0] win_seen = 0, win_prev = 0;
  always @(posedge clk) begin
    win_prev <= win_seen;
    req_take <= 0;
    if (ev_retrans_dup && !rst) n_dup++;
    if (ev_retrans_timeout && !rst) n_to++;
    if (req_valid && !req_take && auto_take && $urandom_range(0, 2) == 0) begin
      req_take <= 1;
      if (req.flags == (TCP_SYN | TCP_ACK)) n_syn++;
      else if (req.retrans) begin
        n_re++;
        last_re_start = req.start;
        chk(req.start == base, "retransmission starts at base");
        chk(req.len <= cfg_max_payload && req.len[1:0] == 0, "retransmission length");
      end else begin
        n_new++;
        last_len = int'(req.len);
        chk(req.start == front, "new data starts at front");
        chk(req.len != 0 && req.len[1:0] == 0, "new data: whole words");
        chk(req.len <= cfg_max_payload, "new data within the payload limit");
        chk(front + 32'(req.len) <= avail, "new data within committed data");
        chk(front + 32'(req.len) - base <= 32'(win_seen) || front + 32'(req.len) - base <= 32'(win_prev),
            "new data within the window");
      end
    end
  end

  task automatic ack(logic [31:0] off, logic [15:0] win);
    @(posedge clk);
    ack_commit <= 1; ack_seq <= ISN + 32'd1 + off; ack_win <= win;
    @(posedge clk);
    ack_commit <= 0;
    @(posedge clk);
    win_seen = win;   // the design has the new window from now on
    @(posedge clk);
  endtask

  task automatic ticks(int n);
    repeat (n) begin
      @(posedge clk); slow_tick <= 1;
      @(posedge clk); slow_tick <= 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    chk(state == TCP_CLOSED && !req_valid, "closed, nothing to send");
    chk(rtt_est == 16'd100, "initial RTT estimate");
    @(posedge clk); syn_commit <= 1; @(posedge clk); syn_commit <= 0;
    repeat (30) @(posedge clk);
    chk(n_syn == 1 && state == TCP_SYN_RCVD, "one SYN-ACK requested");
    ack(0, 16'd2000);
    chk(state == TCP_ESTAB, "established after ACK of SYN-ACK");
    // RTT measurement: sixteen round trips of 5..9 slow ticks, the largest of each group of four is 8
    for (int m = 0; m < 18; m++) begin
      automatic int t = 5 + (m % 4);
      avail <= avail + 32'd40;
      repeat (20) @(posedge clk);
      ticks(t);
      ack(front, 16'd8000);
    end
    chk(rtt_est == 16'd8, $sformatf("RTT estimate from the filter (%0d)", rtt_est));
    // stream with in-order acknowledgement (no slow ticks: samples of 0)
    for (int n = 0; n < 200; n++) begin
      if (avail - base < 32'd3000) avail <= avail + 32'(4 * $urandom_range(1, 300));
      repeat ($urandom_range(2, 30)) @(posedge clk);
      if (front != base && $urandom_range(0, 1) == 0) begin
        automatic logic [31:0] a = base + 32'(4 * $urandom_range(1, int'(front - base) / 4));
        ack(a, 16'($urandom_range(1500, 8000)));
      end
      if (n == 100) cfg_max_payload <= 16'd200;
    end
    chk(n_new > 50 && n_re == 0, $sformatf("new data sent (%0d), no retransmission", n_new));
    chk(rtt_est == 16'd1, "RTT estimate 1 after samples below one tick");
    cfg_max_payload <= 16'd1440;
    // duplicate ACKs
    auto_take = 1;
    avail <= avail + 32'd2000;
    repeat (40) @(posedge clk);
    ack(base + 32'd4, 16'd8000);      // moves base: first of the three
    chk(front != base, "data outstanding");
    ack(base, 16'd8000);
    chk(n_dup == 0, "no retransmission after one duplicate");
    ack(base, 16'd8000);
    repeat (20) @(posedge clk);
    chk(n_dup == 1 && n_re == 1 && last_re_start == base, "retransmission after two duplicates");
    // timeout: no ACK for 2*rtt_est slow ticks
    begin
      automatic logic [15:0] r0 = rtt_est;
      auto_take = 0;
      avail <= avail + 32'd400;
      ticks(2 * int'(r0) - 2);
      chk(n_to == 0, "no timeout before 2*RTT");
      ticks(4);
      auto_take = 1;
      repeat (20) @(posedge clk);
      chk(n_to == 1 && n_re == 2, "timeout retransmission");
      chk(rtt_est == r0 + 1, "RTT estimate +1 on timeout");
    end
    ack(front, 16'd8000);
    // zero window: nothing new, probe after the timeout
    ack(front, 16'd0);
    begin
      automatic int nn = n_new, nr = n_re;
      avail <= avail + 32'd100;
      repeat (100) @(posedge clk);
      chk(n_new == nn, "nothing sent into a zero window");
      ticks(2 * int'(rtt_est) + 2);
      repeat (20) @(posedge clk);
      chk(n_re == nr + 1 && last_len >= 0, "zero window probed on timeout");
    end
    // reset
    @(posedge clk); tcp_reset <= 1; @(posedge clk); tcp_reset <= 0;
    @(posedge clk);
    chk(state == TCP_CLOSED && base == 0 && front == 0, "TCP reset closes the connection");
    $display("new %0d retrans %0d dup %0d timeout %0d rtt %0d", n_new, n_re, n_dup, n_to, rtt_est);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
