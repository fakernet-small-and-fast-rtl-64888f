// tb_fnet_in_fsm: sends frames to the input FSM and checks what it writes
// and reports. RAM models record the writes to the response RAM, the
// register access RAM and the TCP template RAM. Checked: the ARP reply and
// ICMP echo reply (complete frames with valid checksums, addresses swapped),
// a UDP register request copied with swapped addresses/ports and the status
// words inserted, arm and reset of a sequenced channel (token, first
// sequence number, valid UDP checksum, channel active), a sequenced access,
// a repeated one (resend request), out-of-sequence and wrong-port requests
// dropped, the TCP template from a SYN (ports swapped, ack = seq+1), an ACK
// reported with its number and window, and frames dropped for a bad FCS, a
// bad IP checksum, another IP address, a busy response RAM, and an ACK
// outside the sent range.
module tb_fnet_in_fsm;
  import fnet_pkg::*;
  import fnet_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [15:0]     in_word = 0, status0 = 16'hA500, status1 = 16'h0001;
  logic            in_gotword = 0, in_newpacket = 0, timeout_tick = 0;
  pkt_wr_t         resp_wr, ra_wr;
  logic            resp_commit, ra_commit, rr_resend, tpl_wr_en;
  logic [PKT_AW:0] resp_len, ra_len;
  logic            resp_ready = 0, ra_ready = 0, rr_ready = 0, regacc_busy = 0;
  logic [4:0]      tpl_wr_addr;
  logic [15:0]     tpl_wr_data;
  tcp_state_e      tcp_state = TCP_CLOSED;
  logic [31:0]     tcp_base_seq = 32'd1, tcp_front_seq = 32'd1, ack_seq;
  logic            syn_commit, ack_commit;
  logic [15:0]     ack_win;
  logic [1:0]      udp_ch_active;
  logic            ev_rx_good, ev_rx_bad, ev_arp, ev_icmp, ev_udp, ev_tcp;
  logic [15:0]     resp_mem [2**PKT_AW], ra_mem [2**PKT_AW], tpl_mem [32];
  int n_resp = 0, n_ra = 0, n_resend = 0, n_syn = 0, n_ack = 0, n_good = 0, n_bad = 0;
  int checks = 0, failures = 0;

  fnet_in_fsm dut (.clk, .rst, .in_word, .in_gotword, .in_newpacket, .cfg_macaddr(FN_MAC),
    .cfg_ipaddr(FN_IP), .timeout_tick, .status0, .status1, .resp_wr, .resp_commit, .resp_len,
    .resp_ready, .ra_wr, .ra_commit, .ra_len, .ra_ready, .rr_resend, .rr_ready, .regacc_busy,
    .tpl_wr_en, .tpl_wr_addr, .tpl_wr_data, .tcp_state, .tcp_base_seq, .tcp_front_seq,
    .syn_commit, .ack_commit, .ack_seq, .ack_win, .udp_ch_active, .ev_rx_good, .ev_rx_bad,
    .ev_arp, .ev_icmp, .ev_udp, .ev_tcp);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  always @(posedge clk) begin
    if (resp_wr.en) resp_mem[resp_wr.addr] = resp_wr.data;
    if (ra_wr.en) ra_mem[ra_wr.addr] = ra_wr.data;
    if (tpl_wr_en) tpl_mem[tpl_wr_addr] = tpl_wr_data;
    if (resp_commit) n_resp++;
    if (ra_commit) n_ra++;
    if (rr_resend) n_resend++;
    if (syn_commit) n_syn++;
    if (ack_commit) n_ack++;
    if (ev_rx_good) n_good++;
    if (ev_rx_bad) n_bad++;
  end

  task automatic send(wq_t q);
    @(posedge clk);
    in_newpacket <= 1;
    @(posedge clk);
    in_newpacket <= 0;
    for (int i = 0; i < q.size(); i++) begin
      in_word <= q[i];
      in_gotword <= 1;
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_gotword <= 0;
        @(posedge clk);
      end
    end
    in_gotword <= 0;
    repeat (4) @(posedge clk);
  endtask

  function automatic wq_t mem_q(ref logic [15:0] m [2**PKT_AW], input int n);
    wq_t q;
    for (int i = 0; i < n; i++) q.push_back(m[i]);
    return q;
  endfunction

  // send and report what was committed
  int r0, a0, s0, k0, rs0;
  task automatic xfer(wq_t q);
    r0 = n_resp; a0 = n_ra; s0 = n_syn; k0 = n_ack; rs0 = n_resend;
    send(q);
  endtask
  function automatic bit none();
    return n_resp == r0 && n_ra == a0 && n_syn == s0 && n_ack == k0 && n_resend == rs0;
  endfunction

  initial begin
    wq_t q, r;
    logic [11:0] token;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);

    // ARP
    q = arp_request(48'hFFFF_FFFF_FFFF, FN_IP);
    xfer(q);
    chk(n_resp == r0 + 1 && int'(resp_len) == 30, "ARP reply committed");
    r = mem_q(resp_mem, 30);
    chk({r[0], r[1], r[2]} == PC_MAC && {r[3], r[4], r[5]} == FN_MAC && r[6] == 16'h0806, "ARP Ethernet header");
    chk(r[10] == 2 && {r[11], r[12], r[13]} == FN_MAC && {r[14], r[15]} == FN_IP, "ARP sender fields");
    chk({r[16], r[17], r[18]} == PC_MAC && {r[19], r[20]} == PC_IP, "ARP target fields");
    chk(r[7] == 1 && r[8] == 16'h0800 && r[9] == 16'h0604 && r[29] == 0, "ARP fixed fields and padding");
    xfer(arp_request(48'hFFFF_FFFF_FFFF, PC_IP));
    chk(none(), "ARP for another address ignored");

    // ICMP
    q = icmp_echo(16'h99, 16'h3, 30);
    xfer(q);
    chk(n_resp == r0 + 1 && int'(resp_len) == q.size() - 2, "ICMP reply committed");
    r = mem_q(resp_mem, q.size() - 2);
    chk(r[17] == 0 && ip_csum_ok(r) && l4_csum_ok(r, 8'd1), "ICMP reply type and checksums");
    chk({r[13], r[14]} == FN_IP && {r[15], r[16]} == PC_IP && {r[0], r[1], r[2]} == PC_MAC, "ICMP addresses swapped");
    begin
      automatic bit ok = 1;
      for (int i = 19; i < q.size() - 2; i++) if (r[i] != q[i]) ok = 0;
      chk(ok, "ICMP data echoed");
    end
    q[q.size() - 1] ^= 16'h0001;
    xfer(q);
    chk(none(), "bad FCS: nothing committed");
    q = icmp_echo(16'h99, 16'h3, 30);
    q[12] ^= 16'h0100;
    q = finish(q[0:q.size() - 3]);
    xfer(q);
    chk(none(), "bad IP header checksum: dropped");
    resp_ready = 1;
    xfer(icmp_echo(16'h99, 16'h4, 2));
    chk(none(), "busy response RAM: dropped");
    resp_ready = 0;

    // UDP channel 0
    q = udp_req(16'd3000, 16'd1, 16'h0123, '{32'h8000_0001, 32'h4000_0002}, '{32'h0, 32'h5555_AAAA});
    xfer(q);
    chk(n_ra == a0 + 1 && int'(ra_len) == q.size() - 2, "register request committed");
    r = mem_q(ra_mem, q.size() - 2);
    chk({r[0], r[1], r[2]} == PC_MAC && {r[13], r[14]} == FN_IP && {r[15], r[16]} == PC_IP, "request addresses swapped");
    chk(r[17] == 16'd1 && r[18] == 16'd3000, "request ports swapped");
    chk(r[21] == status0 && r[22] == status1 && r[23] == 16'h0123, "status words and request word");
    chk({r[25], r[26], r[27], r[28]} == {32'h8000_0001, 32'h0}, "accesses copied");
    xfer(udp_req(16'd3000, 16'd3, 16'h0000, '{}, '{}));
    chk(none(), "port without a channel: dropped");

    // channel 1: arm, reset, access, resend
    xfer(udp_req(16'd3000, 16'd2, 16'h4000, '{}, '{}));
    r = mem_q(resp_mem, int'(resp_len));
    chk(n_resp == r0 + 1 && r[24][15:14] == 2'b01 && l4_csum_ok(r, 8'd17), "arm reply");
    token = r[24][11:0];
    xfer(udp_req(16'd3000, 16'd2, {4'h8, token + 12'd1}, '{}, '{}));
    chk(none(), "reset with a wrong token: dropped");
    xfer(udp_req(16'd3000, 16'd2, {4'h8, token}, '{}, '{}));
    r = mem_q(resp_mem, int'(resp_len));
    chk(n_resp == r0 + 1 && r[24] == {4'h8, token} && l4_csum_ok(r, 8'd17), "reset reply");
    chk(udp_ch_active == 2'b10, "channel 1 active");
    xfer(udp_req(16'd3000, 16'd2, {4'h0, token + 12'd1}, '{32'h8000_0001}, '{32'h0}));
    chk(n_ra == a0 + 1, "sequenced access accepted");
    ra_ready = 1;   // still being processed: a repeat is dropped
    xfer(udp_req(16'd3000, 16'd2, {4'h0, token + 12'd1}, '{32'h8000_0001}, '{32'h0}));
    chk(none(), "repeat while processing: dropped");
    ra_ready = 0;
    xfer(udp_req(16'd3000, 16'd2, {4'h0, token + 12'd1}, '{32'h8000_0001}, '{32'h0}));
    chk(n_resend == rs0 + 1 && n_ra == a0, "repeat after processing: resend");
    xfer(udp_req(16'd3000, 16'd2, {4'h0, token + 12'd3}, '{32'h8000_0001}, '{32'h0}));
    chk(none(), "out of sequence: dropped");
    xfer(udp_req(16'd3001, 16'd2, {4'h0, token + 12'd2}, '{32'h8000_0001}, '{32'h0}));
    chk(none(), "other source port: dropped");
    xfer(udp_req(16'd3000, 16'd2, 16'h4000, '{}, '{}));
    chk(none(), "arm of a fresh channel: dropped");
    repeat (2) begin @(posedge clk); timeout_tick <= 1; @(posedge clk); timeout_tick <= 0; end
    xfer(udp_req(16'd3000, 16'd2, 16'h4000, '{}, '{}));
    chk(n_resp == r0 + 1, "arm after two timeout ticks");

    // TCP
    q = tcp_seg(16'd40000, 16'd1, 32'h0102_FFFF, 32'h0, 8'h02, 16'd5000);
    xfer(q);
    chk(n_syn == s0 + 1, "SYN reported");
    chk(tpl_mem[17] == 16'd1 && tpl_mem[18] == 16'd40000, "template ports swapped");
    chk({tpl_mem[21], tpl_mem[22]} == 32'h0103_0000, "template ack = seq+1 (carry)");
    chk({tpl_mem[0], tpl_mem[1], tpl_mem[2]} == PC_MAC && {tpl_mem[15], tpl_mem[16]} == PC_IP, "template addresses");
    xfer(tcp_seg(16'd40000, 16'd2, 32'h0, 32'h0, 8'h02, 16'd5000));
    chk(none(), "SYN to another port: dropped");
    tcp_state = TCP_ESTAB;
    tcp_base_seq = 32'd1000; tcp_front_seq = 32'd3000;
    xfer(tcp_seg(16'd40000, 16'd1, 32'h0103_0000, 32'd2000, 8'h10, 16'd7777));
    chk(n_ack == k0 + 1 && ack_seq == 32'd2000 && ack_win == 16'd7777, "ACK reported");
    xfer(tcp_seg(16'd40000, 16'd1, 32'h0103_0000, 32'd3004, 8'h10, 16'd7777));
    chk(none(), "ACK beyond the sent data: dropped");
    xfer(tcp_seg(16'd40000, 16'd1, 32'h0, 32'd0, 8'h02, 16'd5000));
    chk(none(), "SYN while connected: dropped");
    $display("good %0d bad %0d", n_good, n_bad);
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
