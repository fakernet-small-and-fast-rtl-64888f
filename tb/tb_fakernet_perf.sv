// tb_fakernet_perf: TCP streaming throughput of the Fakernet top level.
//
// Runs the top at its default sizes against a PC model, the way the design's
// throughput is characterised: the built-in data generator fills the data
// buffer, the PC model acknowledges every in-order segment after a fixed
// delay (ACK_DELAY clocks, standing in for the network and PC round trip), and
// the octets delivered in order are counted over a measurement interval.
// The output link takes one word per clock, i.e. 2 octets per clock.
//   1. Handshake with a SYN that carries an MSS option (options must be
//      accepted and ignored).
//   2. Payload sweep: the maximum payload register is set to 64 .. 1440
//      octets; each segment must respect the limit, and up to 1024 octets the
//      throughput must reach at least 85 % of what the link allows for that
//      payload (frame overhead of 78 octets: headers, FCS, preamble and gap).
//      At 1440 octets with the link running at one word per clock, the
//      default 4 kiB buffer limits the data in flight (a larger BUF_AW lifts
//      this); there only 60 % is required. Segments follow the data as it is
//      committed, so they are often shorter than the limit.
//   3. Window sweep: the window limit register is set to 512 .. 4096 octets
//      at 1440-octet payloads; no segment may reach beyond the last
//      acknowledgement plus the window, and the throughput must not fall as
//      the window grows.
//   4. Register access flood: back-to-back requests of 60 reads each on the
//      idempotent channel; every access must be marked done.
//   5. The PC stops acknowledging: retransmissions from the last acknowledged
//      point must continue, each interval exactly two slow ticks longer than
//      the one before (timeout = twice the RTT estimate, which grows by one
//      unit per timeout).
// Throughout, the stream must be the generator's running counter without a
// gap. The thresholds are this testbench's; the sweeps mirror the payload and
// window measurements made on real hardware.
module tb_fakernet_perf;
  import fnet_tb_pkg::*;

  localparam int ACK_DELAY = 200;
  localparam int MEAS      = 40000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [15:0] in_word = 0;
  logic        in_gotword = 0, in_newpacket = 0;
  logic [15:0] out_word;
  logic        out_ena, out_payload;
  logic        slow_tick = 0;
  logic [24:0] reg_addr;
  logic [31:0] reg_data_wr, reg_data_rd = 0;
  logic        reg_write, reg_read, reg_done = 0;
  logic        data_free, tcp_reset;

  fakernet dut (
    .clk, .rst, .in_word, .in_gotword, .in_newpacket, .out_word, .out_ena, .out_payload,
    .out_taken(1'b1), .cfg_macaddr(FN_MAC), .cfg_ipaddr(FN_IP), .slow_clock_tick(slow_tick),
    .timeout_tick(1'b0), .reg_addr, .reg_data_wr, .reg_data_rd, .reg_write, .reg_read, .reg_done,
    .data_word(32'h0), .data_offset(7'h0), .data_write(1'b0), .data_commit_len(8'h0),
    .data_commit(1'b0), .data_free, .tcp_reset
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // user registers: answer every access after two clocks
  always @(posedge clk) begin
    reg_done <= 0;
    if (reg_read || reg_write) begin
      reg_data_rd <= {7'd0, reg_addr} ^ 32'hC0DE_0000;
      reg_done    <= 1;
    end
  end

  always begin
    repeat (9) @(posedge clk);
    slow_tick <= 1;
    @(posedge clk);
    slow_tick <= 0;
  end

  // ------------------------------------------------------------- output capture
  wq_t tcpq[$], udpq[$];
  initial begin
    automatic wq_t cur = {};
    forever begin
      @(posedge clk);
      if (rst) cur = {};
      else if (out_ena && out_payload) cur.push_back(out_word);
      if (!out_ena && cur.size() > 0) begin
        check(fcs_ok(cur), "output FCS");
        if (cur[11][7:0] == 8'd6) tcpq.push_back(cur); else udpq.push_back(cur);
        cur = {};
      end
    end
  end

  // ------------------------------------------------------------- input: one sender
  wq_t txq[$];
  logic [31:0] ack_sent = 0;       // acknowledgement number last put on the wire
  logic [31:0] ackq_v[$];
  int          ackq_due[$];
  int          now = 0;
  always @(posedge clk) now <= now + 1;

  task automatic send(wq_t q);
    @(posedge clk);
    in_newpacket <= 1;
    @(posedge clk);
    in_newpacket <= 0;
    foreach (q[i]) begin
      in_word <= q[i];
      in_gotword <= 1;
      @(posedge clk);
    end
    in_gotword <= 0;
    repeat (4) @(posedge clk);
  endtask

  logic [31:0] pc_isn = 32'h3000_0000;
  initial begin
    forever begin
      @(posedge clk);
      if (txq.size() > 0) send(txq.pop_front());
      else if (ackq_due.size() > 0 && now >= ackq_due[0]) begin
        logic [31:0] a;
        // coalesce every acknowledgement that is due
        while (ackq_due.size() > 0 && now >= ackq_due[0]) begin
          a = ackq_v.pop_front();
          void'(ackq_due.pop_front());
        end
        ack_sent = a;
        send(tcp_seg(16'd40000, 16'd1, pc_isn + 1, a, 8'h10, 16'hFFFF));
      end
    end
  end

  // ------------------------------------------------------------- PC TCP receiver
  logic [31:0] rcv_next = 0, expect_v = 0;
  bit          have_first = 0, stream_ok = 1, connected = 0;
  longint      delivered = 0;      // in-order payload octets
  int          max_seg = 0;        // largest payload seen since last clear
  int          win_excess = 0;     // segments beyond ack + window since last clear
  int          win_limit = 65535;
  int          n_segs = 0;
  bit          pc_gone = 0;      // the PC stops acknowledging
  int          retx_t[$];        // times of retransmissions from the last ACK
  initial begin
    wq_t f;
    logic [31:0] seq;
    int plen;
    forever begin
      @(posedge clk);
      while (connected && tcpq.size() > 0) begin
        f = tcpq.pop_front();
        check(ip_csum_ok(f) && l4_csum_ok(f, 8'd6), "TCP checksums");
        seq  = {f[19], f[20]};
        plen = int'(f[8]) - 40;
        n_segs++;
        if (plen > max_seg) max_seg = plen;
        if (int'(seq + 32'(plen) - ack_sent) > win_limit) win_excess++;
        if (pc_gone) begin
          if (seq == ack_sent) retx_t.push_back(now);
        end else if (seq == rcv_next && plen > 0) begin
          for (int i = 0; i < plen / 4; i++) begin
            logic [31:0] w;
            w = {f[27 + 2*i], f[28 + 2*i]};
            if (!have_first) begin expect_v = w; have_first = 1; end
            if (w != expect_v) stream_ok = 0;
            expect_v++;
          end
          rcv_next += 32'(plen);
          delivered += longint'(plen);
          ackq_v.push_back(rcv_next);
          ackq_due.push_back(now + ACK_DELAY);
        end
      end
    end
  end

  // UDP register access on the idempotent channel, waits for the reply
  task automatic regacc(logic [31:0] addrs[$], logic [31:0] datas[$], output wq_t f);
    int t = 0;
    udpq = {};
    txq.push_back(udp_req(16'd5000, 16'd1, 16'h0000, addrs, datas));
    while (udpq.size() == 0 && t < 20000) begin @(posedge clk); t++; end
    check(udpq.size() > 0, "register access reply");
    f = {};
    if (udpq.size() > 0) f = udpq.pop_front();
  endtask

  task automatic set_limits(int payload, int window);
    wq_t f;
    regacc('{32'h4800_0002, 32'h4800_0003}, '{32'(payload), 32'(window)}, f);
    if (f.size() > 0) check(f[25][13] && f[29][13], "limit writes done");
  endtask

  // measure in-order throughput in octets per clock
  task automatic measure(output real tput);
    longint d0;
    repeat (4000) @(posedge clk);          // let the pipeline settle
    max_seg = 0; win_excess = 0;
    d0 = delivered;
    repeat (MEAS) @(posedge clk);
    tput = real'(delivered - d0) / real'(MEAS);
  endtask

  initial begin
    wq_t f, syn;
    real tput, ideal, prev;
    int t;
    automatic int pays[5] = '{64, 256, 512, 1024, 1440};
    automatic int wins[4] = '{512, 1024, 2048, 4096};
    repeat (20) @(posedge clk);
    rst <= 0;
    repeat (300) @(posedge clk);

    // ---- 1. handshake, SYN with an MSS option (data offset 6)
    $display("[%0t] handshake with TCP options", $time);
    syn = ip_header(8'd6, 12, 16'h4444);
    syn.push_back(16'd40000); syn.push_back(16'd1);
    syn.push_back(pc_isn[31:16]); syn.push_back(pc_isn[15:0]);
    syn.push_back(16'h0000); syn.push_back(16'h0000);
    syn.push_back({4'd6, 4'd0, 8'h02}); syn.push_back(16'hFFFF);
    syn.push_back(16'h0000); syn.push_back(16'h0000);
    syn.push_back(16'h0204); syn.push_back(16'd1460);
    syn[25] = ~csum(syn, 17, syn.size(), 32'(csum(syn, 13, 17)) + 32'd6 + 32'd24);
    syn = finish(syn);
    txq.push_back(syn);
    t = 0;
    while (tcpq.size() == 0 && t < 5000) begin @(posedge clk); t++; end
    check(tcpq.size() > 0, "SYN-ACK to a SYN with options");
    if (tcpq.size() > 0) begin
      f = tcpq.pop_front();
      check(f[23] == 16'h5012, "SYN-ACK without options");
      check({f[21], f[22]} == pc_isn + 1, "SYN-ACK acknowledges the SYN");
      check(ip_csum_ok(f) && l4_csum_ok(f, 8'd6), "SYN-ACK checksums");
      rcv_next = {f[19], f[20]} + 1;
    end
    ack_sent = rcv_next;
    txq.push_back(tcp_seg(16'd40000, 16'd1, pc_isn + 1, rcv_next, 8'h10, 16'hFFFF));
    connected = 1;
    // generator on, 100 words per commit group
    regacc('{32'h4800_0004}, '{32'h0000_6401}, f);

    // ---- 2. payload sweep
    prev = 0;
    foreach (pays[i]) begin
      win_limit = 65535;
      set_limits(pays[i], 65535);
      measure(tput);
      ideal = 2.0 * real'(pays[i]) / real'(pays[i] + 78);
      $display("payload %4d: %5.3f octets/clock, link limit %5.3f (%0.1f %%)",
               pays[i], tput, ideal, 100.0 * tput / ideal);
      check(max_seg <= pays[i], $sformatf("segments within the %0d-octet payload limit", pays[i]));
      // up to 1024 octets the link is saturated; at 1440 two segments in
      // flight plus the ACK delay exceed what the 4 kiB buffer can hold
      // (about 2.5 to 3 kiB unacknowledged), so only a lower bound is set
      if (pays[i] <= 1024) begin
        check(tput >= 0.85 * ideal, $sformatf("payload %0d saturates the link", pays[i]));
        check(tput >= prev, "throughput grows with the payload");
      end else check(tput >= 0.6 * ideal, "1440-octet payloads, buffer-limited");
      prev = tput;
    end

    // ---- 3. window sweep at 1440-octet payloads
    prev = 0;
    foreach (wins[i]) begin
      set_limits(1440, wins[i]);
      win_limit = wins[i];
      measure(tput);
      $display("window %4d: %5.3f octets/clock, %0d segments", wins[i], tput, n_segs);
      check(win_excess == 0, $sformatf("no segment beyond the %0d-octet window", wins[i]));
      check(max_seg <= wins[i], "segments within the window");
      check(tput >= 0.95 * prev, "throughput does not fall as the window grows");
      check(tput > 0.2, "window-limited stream keeps flowing");
      prev = tput;
    end
    check(stream_ok && delivered > 100000, $sformatf("stream is the generator's counter (%0d octets)", delivered));

    // ---- 4. register access flood on the idempotent channel
    $display("[%0t] register access flood", $time);
    begin
      automatic int t0 = now, done_n = 0, n = 0;
      for (int r = 0; r < 20; r++) begin
        logic [31:0] a[$], d[$];
        a = {}; d = {};
        for (int k = 0; k < 60; k++) begin a.push_back(32'h8000_0000 | 32'(r * 60 + k)); d.push_back(0); end
        regacc(a, d, f);
        if (f.size() > 0)
          for (int k = 0; k < 60; k++) begin
            n++;
            if (f[25 + 4*k][13] && {f[27 + 4*k], f[28 + 4*k]} == ((r * 60 + k) ^ 32'hC0DE_0000)) done_n++;
          end
      end
      check(n == 1200 && done_n == 1200, $sformatf("all flood reads done and correct (%0d of %0d)", done_n, n));
      $display("flood: 1200 reads in %0d clocks, while TCP streams", now - t0);
    end

    // ---- 5. the PC goes away: retransmissions decay to a trickle
    $display("[%0t] PC stops acknowledging", $time);
    repeat (2000) @(posedge clk);
    pc_gone = 1;
    ackq_v = {}; ackq_due = {};
    t = 0;
    while (retx_t.size() < 8 && t < 400000) begin @(posedge clk); t++; end
    check(retx_t.size() == 8, $sformatf("retransmissions keep coming (%0d)", retx_t.size()));
    if (retx_t.size() == 8) begin
      automatic bit grows = 1;
      for (int k = 2; k < 8; k++) begin
        automatic int d0 = retx_t[k-1] - retx_t[k-2], d1 = retx_t[k] - retx_t[k-1];
        $display("retransmission interval %0d clocks", d1);
        // timeout = 2 x estimate, estimate + 1 per timeout: +2 ticks of 10 clocks
        if (d1 - d0 != 20) grows = 0;
      end
      check(grows, "each retransmission interval two RTT ticks longer");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
