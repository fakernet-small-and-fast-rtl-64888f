// tb_fnet_tcp_prep: offers random TCP packet requests (SYN-ACK, data of
// random start and length, retransmissions) to the prepare FSM with a
// template RAM and a data buffer modelled here (registered reads). The
// writes to the two packet RAMs are recorded; at each commit the packet is
// checked: header words from the template, IP total length, sequence number
// ISN+1+start (ISN for the SYN-ACK), flags, window, payload words from the
// circular buffer in order, zero padding to 30 words, valid IP header and TCP
// checksums, and the length. The reader side releases RAMs after a random
// time, and the FSM must use the two RAMs alternately and never write into a
// RAM still holding a packet.
module tb_fnet_tcp_prep;
  import fnet_pkg::*;
  import fnet_tb_pkg::*;
  localparam int BUF_AW = 10;
  localparam logic [31:0] ISN = 32'h1234_5678;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic              req_valid = 0, req_take;
  tcp_req_t          req;
  logic [4:0]        tpl_rd_addr;
  logic [15:0]       tpl_rd_data;
  logic [BUF_AW-1:0] buf_rd_addr;
  logic [31:0]       buf_rd_data;
  pkt_wr_t           prep_wr;
  logic [1:0]        prep_commit, prep_ready = 0;
  logic [PKT_AW:0]   prep_len;
  logic              prep_sel, busy;
  logic [15:0]       tpl [32];
  logic [31:0]       bufm [2**BUF_AW];
  logic [15:0]       ram [2][2**PKT_AW];
  int checks = 0, failures = 0, packets = 0, bad_writes = 0, expect_sel = 0;
  tcp_req_t          taken_q[$];

  fnet_tcp_prep #(.TCP_ISN(ISN), .BUF_AW(BUF_AW)) dut (.clk, .rst, .req_valid, .req, .req_take,
    .tpl_rd_addr, .tpl_rd_data, .buf_rd_addr, .buf_rd_data, .prep_wr, .prep_commit, .prep_len,
    .prep_sel, .prep_ready, .busy);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  always @(posedge clk) begin
    tpl_rd_data <= tpl[tpl_rd_addr];
    buf_rd_data <= bufm[buf_rd_addr];
    if (prep_wr.en) begin
      if (prep_ready[prep_sel]) bad_writes++;
      ram[prep_sel][prep_wr.addr] = prep_wr.data;
    end
    if (req_take && !rst) taken_q.push_back(req);
  end

  task automatic check_packet(int s, int n, tcp_req_t r);
    wq_t q;
    logic [31:0] seq;
    for (int i = 0; i < n; i++) q.push_back(ram[s][i]);
    seq = r.flags[1] ? ISN : ISN + 32'd1 + r.start;
    chk(n == ((27 + int'(r.len) / 2 < 30) ? 30 : 27 + int'(r.len) / 2), "packet length");
    begin
      automatic bit ok = 1;
      for (int i = 0; i < 27; i++)
        if (!(i inside {W_IP_LEN, W_IP_CSUM, W_TCP_SEQ, W_TCP_SEQ + 1, W_TCP_FLAGS, W_TCP_WIN,
                        W_TCP_CSUM, W_TCP_URG}) && q[i] != tpl[i]) ok = 0;
      chk(ok, "header words from the template");
    end
    chk(q[W_IP_LEN] == 16'd40 + r.len, "IP total length");
    chk({q[W_TCP_SEQ], q[W_TCP_SEQ + 1]} == seq, "sequence number");
    chk(q[W_TCP_FLAGS] == {8'h50, r.flags}, "data offset and flags");
    chk(q[W_TCP_URG] == 0, "urgent pointer");
    chk(ip_csum_ok(q), "IP header checksum");
    chk(l4_csum_ok(q, 8'd6), "TCP checksum");
    begin
      automatic bit ok = 1;
      for (int i = 0; i < int'(r.len) / 4; i++)
        if ({q[27 + 2*i], q[28 + 2*i]} != bufm[BUF_AW'(r.start / 4 + i)]) ok = 0;
      for (int i = 27 + int'(r.len) / 2; i < n; i++) if (q[i] != 0) ok = 0;
      chk(ok, "payload from the data buffer, zero padding");
    end
  endtask

  // reader: releases committed RAMs after a while, checks each packet
  initial begin
    forever begin
      @(posedge clk);
      if (!rst) for (int s = 0; s < 2; s++)
        if (prep_commit[s]) begin
          chk(s == expect_sel, "RAMs used alternately");
          expect_sel = 1 - expect_sel;
          chk(taken_q.size() > 0, "commit follows a taken request");
          if (taken_q.size() > 0) check_packet(s, int'(prep_len), taken_q.pop_front());
          packets++;
          prep_ready[s] <= 1'b1;
          fork
            automatic int ss = s;
            begin
              repeat ($urandom_range(10, 1500)) @(posedge clk);
              prep_ready[ss] <= 1'b0;
            end
          join_none
        end
    end
  end

  initial begin
    wq_t t;
    t = tcp_seg(16'd1, 16'd40000, 32'h0, 32'hAABB_CCDD, 8'h10, 16'h0);
    foreach (tpl[i]) tpl[i] = (i < 27) ? t[i] : 16'h0;
    foreach (bufm[i]) bufm[i] = $urandom;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      automatic tcp_req_t r = '0;
      automatic int kind = $urandom_range(0, 5);
      case (kind)
        0: r.flags = TCP_SYN | TCP_ACK;
        1: begin r.flags = TCP_ACK | TCP_PSH; r.retrans = 1; r.start = 32'(4 * $urandom_range(0, 5000)); r.len = 16'(4 * $urandom_range(0, 360)); end
        default: begin r.flags = TCP_ACK | TCP_PSH; r.start = 32'(4 * $urandom_range(0, 5000)); r.len = 16'(4 * $urandom_range(1, 360)); end
      endcase
      if (n < 5) r.len = 16'(4 * n);   // the shortest packets, padded
      @(posedge clk);
      req_valid <= 1; req <= r;
      @(posedge clk);
      while (!req_take) @(posedge clk);
      req_valid <= 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    repeat (5000) @(posedge clk);
    chk(packets == 300, $sformatf("all packets committed (%0d)", packets));
    chk(bad_writes == 0, "no writes into a RAM holding a packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
