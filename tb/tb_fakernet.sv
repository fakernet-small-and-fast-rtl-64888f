// tb_fakernet: end-to-end test of the Fakernet top level at its default sizes.
//
// A PC model on the testbench side sends frames as 16-bit words and collects
// the frames the design transmits (checking preamble, FCS, IP and L4
// checksums on every one). A user register model answers reg_read/reg_write
// and a user data producer feeds the TCP data interface. The test walks
// through: ARP (to the own and to the broadcast MAC), ICMP echo, idempotent
// UDP register reads and writes, the arm/reset/access sequence on the second
// UDP channel with a retransmitted request, internal registers (TCP reset,
// debug counter), a register access timeout, frames with a bad FCS and a bad
// IP checksum (dropped), a response dropped because the response RAM is busy,
// the TCP SYN / SYN-ACK / ACK handshake, streaming data with the received
// stream compared word for word, retransmission after three equal ACKs and
// after an RTT timeout, a zero-window probe, data buffer overflow, and the
// built-in data generator. Each mechanism is counted and a mechanism that
// never happened is a failure.
module tb_fakernet;
  import fnet_tb_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [15:0] in_word;
  logic        in_gotword, in_newpacket;
  logic [15:0] out_word;
  logic        out_ena, out_payload, out_taken;
  logic        slow_tick, timeout_tick;
  logic [24:0] reg_addr;
  logic [31:0] reg_data_wr, reg_data_rd;
  logic        reg_write, reg_read, reg_done;
  logic [31:0] data_word;
  logic [6:0]  data_offset;
  logic        data_write, data_commit;
  logic [7:0]  data_commit_len;
  logic        data_free, tcp_reset;

  fakernet dut (
    .clk, .rst, .in_word, .in_gotword, .in_newpacket, .out_word, .out_ena, .out_payload,
    .out_taken, .cfg_macaddr(FN_MAC), .cfg_ipaddr(FN_IP), .slow_clock_tick(slow_tick),
    .timeout_tick, .reg_addr, .reg_data_wr, .reg_data_rd, .reg_write, .reg_read, .reg_done,
    .data_word, .data_offset, .data_write, .data_commit_len, .data_commit, .data_free, .tcp_reset
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------------- mechanisms
  typedef enum int {
    M_ARP, M_ARP_BCAST, M_ICMP, M_UDP_IDEM, M_UDP_ARM, M_UDP_RESET, M_UDP_SEQ, M_UDP_RESEND,
    M_INT_REG, M_REG_TIMEOUT, M_DROP_FCS, M_DROP_CSUM, M_DROP_BUSY, M_SYNACK, M_TCP_DATA,
    M_RETR_DUP, M_RETR_TIMEOUT, M_ZERO_WIN, M_OVERFLOW, M_DATAGEN, M_PRIORITY, M_NUM
  } mech_e;
  int mech [M_NUM];
  bit verbose = 0;

  // ------------------------------------------------------------- user register model
  logic [31:0] user_regs [16];
  int          user_writes = 0;
  bit          user_silent = 0;
  initial begin
    reg_done = 0; reg_data_rd = 0;
    foreach (user_regs[i]) user_regs[i] = 32'hA000_0000 + i;
    forever begin
      @(posedge clk);
      reg_done <= 0;
      if ((reg_read || reg_write) && !user_silent) begin
        logic rd, wr;
        logic [24:0] a;
        logic [31:0] d;
        rd = reg_read; wr = reg_write; a = reg_addr; d = reg_data_wr;
        repeat (3) @(posedge clk);
        if (wr) begin user_regs[a[3:0]] = d; user_writes++; end
        reg_data_rd <= user_regs[a[3:0]];
        reg_done <= 1;
      end
    end
  end

  // ------------------------------------------------------------- ticks
  bit slow_run = 0;
  initial begin
    slow_tick = 0; timeout_tick = 0;
    forever begin
      @(posedge clk);
      slow_tick <= 0;
      if (slow_run) begin
        repeat (9) @(posedge clk);
        slow_tick <= 1;
      end
    end
  end

  // ------------------------------------------------------------- output capture
  wq_t rxq[$];
  int  taken_hold = 0;   // when > 0, out_taken is held low
  bit  pre_ok;
  initial begin
    automatic wq_t cur = {};
    automatic int  npre = 0;
    out_taken = 1;
    npre = 0;
    forever begin
      @(posedge clk);
      if (out_taken && out_ena && !out_payload) begin
        if (npre < 3) pre_ok = (out_word == 16'h5555); else pre_ok = pre_ok && (out_word == 16'h55D5);
        npre++;
      end
      if (out_taken && out_ena && out_payload) cur.push_back(out_word);
      if (out_taken && !out_ena && cur.size() > 0) begin
        check(npre == 4 && pre_ok, "preamble");
        check(fcs_ok(cur), "output FCS");
        rxq.push_back(cur);
        cur = {};
        npre = 0;
      end
      out_taken <= (taken_hold > 0) ? 1'b0 : 1'b1;
      if (taken_hold > 0) taken_hold--;
    end
  end

  // ------------------------------------------------------------- sending
  task automatic send(wq_t q, int gap = 0);
    @(posedge clk);
    in_newpacket <= 1;
    @(posedge clk);
    in_newpacket <= 0;
    for (int i = 0; i < q.size(); i++) begin
      in_word <= q[i];
      in_gotword <= 1;
      @(posedge clk);
      if (gap > 0) begin
        in_gotword <= 0;
        repeat (gap) @(posedge clk);
      end
    end
    in_gotword <= 0;
    repeat (6) @(posedge clk);
  endtask

  task automatic wait_frame(output wq_t f, input int timeout = 4000);
    int t = 0;
    while (rxq.size() == 0 && t < timeout) begin @(posedge clk); t++; end
    if (rxq.size() == 0) begin
      f = {};
      check(0, "expected a frame");
    end else f = rxq.pop_front();
  endtask

  task automatic expect_none(int cycles, string what);
    repeat (cycles) @(posedge clk);
    check(rxq.size() == 0, what);
    rxq = {};
  endtask

  // UDP transaction, returns the response
  task automatic udp_xfer(logic [15:0] dport, logic [15:0] req, logic [31:0] addrs[$],
                          logic [31:0] datas[$], output wq_t f);
    send(udp_req(16'd5000, dport, req, addrs, datas), $urandom_range(0, 1));
    wait_frame(f);
    if (f.size() > 0) begin
      check(f[6] == 16'h0800 && f[11][7:0] == 8'd17, "UDP reply is UDP");
      check(ip_csum_ok(f) && l4_csum_ok(f, 8'd17), "UDP reply checksums");
      check(f[17] == dport && f[18] == 16'd5000, "UDP reply ports swapped");
      check({f[0], f[1], f[2]} == PC_MAC && {f[3], f[4], f[5]} == FN_MAC, "UDP reply MACs");
    end
  endtask

  // ------------------------------------------------------------- TCP PC model
  logic [31:0] pc_isn = 32'h1000_0000;
  logic [31:0] rcv_next;           // next expected sequence number
  logic [31:0] fn_isn;
  logic [31:0] stream[$];          // words the user wrote, in order
  int          stream_pos = 0;     // words received in order
  logic [31:0] user_ctr = 0;

  task automatic user_commit(int n);
    // write n words in reverse order, commit with the last write
    for (int i = n - 1; i >= 0; i--) begin
      @(posedge clk);
      data_word   <= user_ctr + 32'(i) ^ 32'h5A5A0000;
      data_offset <= 7'(i);
      data_write  <= 1;
      data_commit <= (i == 0);
      data_commit_len <= 8'(n);
    end
    @(posedge clk);
    data_write <= 0; data_commit <= 0;
    for (int i = 0; i < n; i++) stream.push_back(user_ctr + 32'(i) ^ 32'h5A5A0000);
    user_ctr += 32'(n);
  endtask

  // check a TCP frame from the design; returns seq and payload length in octets
  task automatic tcp_frame(wq_t f, output logic [31:0] seq, output int plen, output logic [7:0] flags);
    seq = {f[19], f[20]};
    plen = int'(f[8]) - 40;
    flags = f[23][7:0];
    check(f[11][7:0] == 8'd6 && ip_csum_ok(f) && l4_csum_ok(f, 8'd6), "TCP checksums");
    check(f[17] == 16'd1 && f[18] == 16'd40000, "TCP ports");
    check({f[21], f[22]} == pc_isn + 1, "TCP ack field");
  endtask

  // take a data frame: compare in-order data with the stream
  task automatic take_data(wq_t f, output logic [31:0] seq, output int plen);
    logic [7:0] fl;
    tcp_frame(f, seq, plen, fl);
    if (verbose) $display("[%0t] seg seq=%0d len=%0d expect=%0d", $time, seq - fn_isn - 1, plen, rcv_next - fn_isn - 1);
    if (seq == rcv_next) begin
      for (int i = 0; i < plen / 4; i++) begin
        if (stream_pos < stream.size())
          check({f[27 + 2*i], f[28 + 2*i]} == stream[stream_pos], "TCP payload word");
        stream_pos++;
      end
      rcv_next += 32'(plen);
    end
  endtask

  // take every frame that has arrived; acknowledge if new data came in order
  task automatic drain();
    automatic int pos0 = stream_pos;
    wq_t f;
    logic [31:0] seq;
    int plen;
    while (rxq.size() > 0) begin
      f = rxq.pop_front();
      take_data(f, seq, plen);
      if (plen > 0) mech[M_TCP_DATA]++;
    end
    if (stream_pos != pos0) send_ack();
  endtask

  task automatic send_ack(logic [15:0] win = 16'hFFFF);
    send(tcp_seg(16'd40000, 16'd1, pc_isn + 1, rcv_next, 8'h10, win));
  endtask

  // ------------------------------------------------------------- main
  initial begin
    wq_t f;
    logic [31:0] seq, a1[$], d1[$];
    int plen;
    logic [7:0] fl;
    logic [11:0] token, seqn;
    in_word = 0; in_gotword = 0; in_newpacket = 0;
    data_word = 0; data_offset = 0; data_write = 0; data_commit = 0; data_commit_len = 0;
    repeat (20) @(posedge clk);
    rst = 0;
    repeat (20) @(posedge clk);

    // ---- ARP
    $display("[%0t] ARP", $time);
    send(arp_request(48'hFFFF_FFFF_FFFF, FN_IP));
    wait_frame(f);
    if (f.size() > 0) begin
      check(f.size() == 32, "ARP reply length");
      check(f[10] == 16'h0002, "ARP reply opcode");
      check({f[11], f[12], f[13]} == FN_MAC && {f[14], f[15]} == FN_IP, "ARP sender = own");
      check({f[16], f[17], f[18]} == PC_MAC && {f[19], f[20]} == PC_IP, "ARP target = PC");
      check({f[0], f[1], f[2]} == PC_MAC && {f[3], f[4], f[5]} == FN_MAC, "ARP MACs");
      mech[M_ARP_BCAST]++;
    end
    send(arp_request(FN_MAC, FN_IP));
    wait_frame(f);
    if (f.size() > 0 && f[10] == 16'h0002) mech[M_ARP]++;
    send(arp_request(48'hFFFF_FFFF_FFFF, PC_IP));   // not for us
    expect_none(300, "ARP for another IP ignored");

    // ---- ICMP echo
    $display("[%0t] ICMP echo", $time);
    send(icmp_echo(16'h77, 16'h5, 40));
    wait_frame(f);
    if (f.size() > 0) begin
      check(f[17] == 16'h0000, "ICMP echo reply type");
      check(ip_csum_ok(f) && l4_csum_ok(f, 8'd1), "ICMP checksums");
      check({f[13], f[14]} == FN_IP && {f[15], f[16]} == PC_IP, "ICMP IPs swapped");
      check(f[19] == 16'h77 && f[20] == 16'h5 && f[21 + 7] == 16'(7 * 257 + 3), "ICMP data echoed");
      mech[M_ICMP]++;
    end

    // ---- dropped frames
    $display("[%0t] dropped frames", $time);
    begin
      wq_t q;
      q = icmp_echo(16'h1, 16'h1, 4);
      q[q.size() - 1] ^= 16'h0100;
      send(q);
      expect_none(400, "bad FCS dropped");
      mech[M_DROP_FCS]++;
      q = icmp_echo(16'h1, 16'h1, 4);
      q[12] ^= 16'h0001;
      q = q[0:q.size()-3];
      q = finish(q);
      send(q);
      expect_none(400, "bad IP checksum dropped");
      mech[M_DROP_CSUM]++;
    end

    // ---- busy response RAM: two pings while the output is stalled
    $display("[%0t] busy response RAM: two pings while the output is stalled", $time);
    taken_hold = 3000;
    send(icmp_echo(16'h2, 16'h1, 4));
    send(icmp_echo(16'h2, 16'h2, 4));
    wait_frame(f, 6000);
    repeat (500) @(posedge clk);
    check(rxq.size() == 0, "second ping dropped while response RAM busy");
    if (f.size() > 0 && f[20] == 16'h1 && rxq.size() == 0) mech[M_DROP_BUSY]++;
    rxq = {};

    // ---- idempotent UDP channel 0: read two user registers, write one
    $display("[%0t] idempotent UDP channel 0: read two user registers, write one", $time);
    a1 = '{32'h8000_0003, 32'h4000_0005, 32'h8000_0005};
    d1 = '{32'h0, 32'hCAFE_F00D, 32'h0};
    udp_xfer(16'd1, 16'h0000, a1, d1, f);
    if (f.size() > 0) begin
      check(f[25][13] && f[29][13] && f[33][13], "accesses marked done");
      check({f[27], f[28]} == 32'hA000_0003, "read data");
      check({f[35], f[36]} == 32'hCAFE_F00D, "read after write");
      check(f[21][1:0] == 2'd0, "status: TCP closed");
      mech[M_UDP_IDEM]++;
    end

    // ---- access channel 1: arm, reset, access, retransmitted access
    $display("[%0t] access channel 1: arm, reset, access, retransmitted access", $time);
    udp_xfer(16'd2, 16'h4000, '{}, '{}, f);
    if (f.size() > 0) begin
      check(f[24][15:14] == 2'b01, "arm reply");
      token = f[24][11:0];
      mech[M_UDP_ARM]++;
    end
    send(udp_req(16'd5000, 16'd2, {4'h8, 12'h000}, '{}, '{}));  // reset with a wrong token
    if (token == 12'h000) mech[M_UDP_RESET] += 0;
    expect_none(600, "reset with wrong token ignored");
    udp_xfer(16'd2, {4'h8, token}, '{}, '{}, f);
    if (f.size() > 0) begin
      check(f[24][15:14] == 2'b10, "reset reply");
      seqn = f[24][11:0];
      mech[M_UDP_RESET]++;
    end
    user_writes = 0;
    udp_xfer(16'd2, {4'h0, seqn + 12'd1}, '{32'h4000_0007}, '{32'h1234_5678}, f);
    if (f.size() > 0 && f[25][13]) mech[M_UDP_SEQ]++;
    if (f.size() > 0) check(f[21][9], "status: channel 1 in use");
    check(user_regs[7] == 32'h1234_5678 && user_writes == 1, "sequenced write done once");
    // the response is lost: the PC sends the same request again
    udp_xfer(16'd2, {4'h0, seqn + 12'd1}, '{32'h4000_0007}, '{32'h1234_5678}, f);
    check(user_writes == 1, "retransmitted request not performed again");
    if (f.size() > 0 && f[25][13]) mech[M_UDP_RESEND]++;
    send(udp_req(16'd5000, 16'd2, {4'h0, seqn + 12'd5}, '{32'h4000_0007}, '{32'h0}));
    expect_none(600, "out-of-sequence access ignored");
    send(udp_req(16'd5001, 16'd2, {4'h0, seqn + 12'd2}, '{32'h4000_0007}, '{32'h0}));
    expect_none(600, "access from another port ignored");
    send(udp_req(16'd5000, 16'd2, 16'h4000, '{}, '{}));
    expect_none(600, "arm of a recently used channel ignored");

    // ---- register access timeout
    $display("[%0t] register access timeout", $time);
    user_silent = 1;
    udp_xfer(16'd1, 16'h0000, '{32'h8000_0001}, '{32'h0}, f);
    if (f.size() > 0) begin
      check(!f[25][13], "timed-out access not marked done");
      if (!f[25][13]) mech[M_REG_TIMEOUT]++;
    end
    user_silent = 0;

    // ---- internal registers: reset TCP, read a debug counter (ARP replies)
    $display("[%0t] internal registers: reset TCP, read a debug counter (ARP replies)", $time);
    udp_xfer(16'd1, 16'h0000, '{32'h4800_0001, 32'h8800_0102}, '{32'h1, 32'h0}, f);
    if (f.size() > 0) begin
      check(f[25][13] && f[29][13], "internal accesses done");
      check({f[31], f[32]} == 32'd2, "debug counter: 2 ARP requests answered");
      if ({f[31], f[32]} == 32'd2) mech[M_INT_REG]++;
    end

    // ---- TCP handshake
    $display("[%0t] TCP handshake", $time);
    send(tcp_seg(16'd40000, 16'd1, pc_isn, 32'h0, 8'h02, 16'hFFFF));
    wait_frame(f);
    if (f.size() > 0) begin
      tcp_frame(f, seq, plen, fl);
      check(fl == 8'h12 && plen == 0, "SYN-ACK flags");
      fn_isn = seq;
      rcv_next = seq + 1;
      mech[M_SYNACK]++;
    end
    send(tcp_seg(16'd40000, 16'd1, pc_isn, 32'h0, 8'h02, 16'hFFFF));
    expect_none(400, "second SYN ignored while connected");
    send_ack();
    repeat (50) @(posedge clk);
    udp_xfer(16'd1, 16'h0000, '{}, '{}, f);
    if (f.size() > 0) check(f[21][1:0] == 2'd2, "status: TCP established");

    // ---- streaming: 40 groups of 16..64 words, ACK what arrives
    $display("[%0t] streaming: 40 groups of 16..64 words, ACK what arrives", $time);
    slow_run = 0;
    for (int g = 0; g < 40; g++) begin
      automatic int t = 0;
      while (!data_free) begin
        @(posedge clk);
        t++;
        if (t % 200 == 0) drain();
      end
      user_commit($urandom_range(16, 64));
      drain();
    end
    for (int k = 0; k < 200 && stream_pos < stream.size(); k++) begin
      repeat (100) @(posedge clk);
      drain();
    end
    check(stream_pos == stream.size(), "whole stream received in order");

    // ---- UDP response gets priority over queued TCP data
    $display("[%0t] UDP response gets priority over queued TCP data", $time);
    user_commit(120);
    repeat (8) @(posedge clk);
    send(udp_req(16'd5000, 16'd1, 16'h0000, '{32'h8000_0002}, '{32'h0}));
    begin
      automatic int pos_udp = -1;
      for (int k = 0; k < 6; k++) begin
        wait_frame(f, 3000);
        if (f.size() > 0 && f[11][7:0] == 8'd17) pos_udp = k;
        else if (f.size() > 0) take_data(f, seq, plen);
        if (pos_udp >= 0) break;
      end
      check(pos_udp >= 0 && pos_udp <= 2, "UDP reply sent before later TCP data");
      if (pos_udp >= 0 && pos_udp <= 2) mech[M_PRIORITY]++;
    end
    while (stream_pos < stream.size()) begin
      wait_frame(f);
      if (f.size() == 0) break;
      take_data(f, seq, plen);
      send_ack();
    end
    send_ack();
    repeat (200) @(posedge clk);
    rxq = {};

    // ---- duplicate ACKs: lose one packet, receiver repeats its ACK
    $display("[%0t] duplicate ACKs: lose one packet, receiver repeats its ACK", $time);
    user_commit(100);
    wait_frame(f);   // this one is "lost"
    user_commit(100);
    begin
      logic [31:0] lost_seq;
      lost_seq = {f[19], f[20]};
      wait_frame(f);
      send_ack(); send_ack(); send_ack();
      for (int k = 0; k < 4; k++) begin
        wait_frame(f, 3000);
        if (f.size() > 0 && {f[19], f[20]} == lost_seq) begin
          mech[M_RETR_DUP]++;
          take_data(f, seq, plen);
          break;
        end
      end
    end
    // take the rest
    for (int k = 0; k < 6 && stream_pos < stream.size(); k++) begin
      send_ack();
      wait_frame(f, 3000);
      if (f.size() > 0) take_data(f, seq, plen);
    end
    send_ack();
    repeat (200) @(posedge clk);
    rxq = {};
    check(stream_pos == stream.size(), "stream complete after dup-ACK retransmission");

    // ---- RTT timeout: data is never acknowledged
    $display("[%0t] RTT timeout: data is never acknowledged", $time);
    user_commit(20);
    wait_frame(f);
    slow_run = 1;
    begin
      logic [31:0] s0;
      s0 = {f[19], f[20]};
      wait_frame(f, 200000);
      if (f.size() > 0 && {f[19], f[20]} == s0) mech[M_RETR_TIMEOUT]++;
      check(f.size() > 0 && {f[19], f[20]} == s0, "timeout retransmission from base");
      take_data(f, seq, plen);
    end
    slow_run = 0;
    send_ack();
    repeat (100) @(posedge clk);
    rxq = {};

    // ---- zero window: no data sent until a probe after the timeout
    $display("[%0t] zero window: no data sent until a probe after the timeout", $time);
    send_ack(16'd0);
    user_commit(10);
    expect_none(2000, "nothing sent into a zero window");
    slow_run = 1;
    wait_frame(f, 400000);
    slow_run = 0;
    if (f.size() > 0) begin
      tcp_frame(f, seq, plen, fl);
      check(plen == 0, "zero-window probe has no data");
      if (plen == 0) mech[M_ZERO_WIN]++;
    end
    send_ack(16'hFFFF);
    for (int k = 0; k < 4 && stream_pos < stream.size(); k++) begin
      wait_frame(f, 3000);
      if (f.size() > 0) take_data(f, seq, plen);
      send_ack();
    end
    check(stream_pos == stream.size(), "stream complete after zero window");
    repeat (200) @(posedge clk);
    rxq = {};

    // ---- overflow: keep committing without looking at data_free, no ACKs
    $display("[%0t] overflow: keep committing without looking at data_free, no ACKs", $time);
    for (int g = 0; g < 40; g++) user_commit(127);
    repeat (50) @(posedge clk);
    rxq = {};
    udp_xfer(16'd1, 16'h0000, '{32'h8800_0000}, '{32'h0}, f);
    if (f.size() > 0) begin
      check(f[22][0] && f[28][2], "overflow reported in status words");
      if (f[22][0]) mech[M_OVERFLOW]++;
    end

    // ---- data generator after a TCP reset and a new connection
    $display("[%0t] data generator after a TCP reset and a new connection", $time);
    udp_xfer(16'd1, 16'h0000, '{32'h4800_0001, 32'h4800_0004}, '{32'h1, 32'h0000_2001}, f);
    repeat (20) @(posedge clk);
    rxq = {};
    pc_isn = 32'h2000_0000;
    send(tcp_seg(16'd40000, 16'd1, pc_isn, 32'h0, 8'h02, 16'hFFFF));
    wait_frame(f);
    if (f.size() > 0) begin
      tcp_frame(f, seq, plen, fl);
      rcv_next = seq + 1;
    end
    send_ack();
    begin
      automatic int words = 0;
      automatic logic [31:0] expect_v = 0;
      automatic bit ok = 1;
      for (int k = 0; k < 12; k++) begin
        wait_frame(f, 5000);
        if (f.size() == 0) break;
        tcp_frame(f, seq, plen, fl);
        if (seq == rcv_next) begin
          for (int i = 0; i < plen / 4; i++) begin
            if ({f[27 + 2*i], f[28 + 2*i]} != expect_v) ok = 0;
            expect_v++;
          end
          rcv_next += 32'(plen);
          words += plen / 4;
        end
        send_ack();
      end
      check(ok && words > 500, "generator stream is a running counter");
      if (ok && words > 500) mech[M_DATAGEN]++;
    end

    foreach (mech[m]) begin
      check(mech[m] > 0, $sformatf("mechanism %s happened", mech_e'(m)));
      $display("mechanism %-15s %0d", mech_e'(m), mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
