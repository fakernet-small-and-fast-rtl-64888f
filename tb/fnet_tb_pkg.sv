// fnet_tb_pkg: packet builders and checkers for the Fakernet testbenches.
//
// Frames are queues of 16-bit words, first octet in [15:8], starting at the
// destination MAC address and (once finished) ending with the two FCS words.
// The checksum and CRC code here is written independently of the design's
// package: the CRC is computed bit-serially over a byte stream, the
// checksums as 32-bit sums folded at the end.
package fnet_tb_pkg;

  typedef logic [15:0] wq_t[$];

  localparam logic [47:0] FN_MAC = 48'h02_00_00_00_00_42;
  localparam logic [31:0] FN_IP  = {8'd172, 8'd16, 8'd0, 8'd42};
  localparam logic [47:0] PC_MAC = 48'h00_11_22_33_44_55;
  localparam logic [31:0] PC_IP  = {8'd172, 8'd16, 8'd0, 8'd1};

  // ones' complement sum of words [from, to)
  function automatic logic [15:0] csum(wq_t q, int from, int to, logic [31:0] init = 0);
    logic [31:0] s;
    s = init;
    for (int i = from; i < to; i++) s += 32'(q[i]);
    while (s[31:16] != 0) s = 32'(s[15:0]) + 32'(s[31:16]);
    return s[15:0];
  endfunction

  function automatic logic [31:0] crc_bytes(wq_t q, int n);
    logic [31:0] c;
    logic [7:0]  b;
    c = 32'hFFFFFFFF;
    for (int i = 0; i < n; i++) begin
      for (int h = 0; h < 2; h++) begin
        b = h == 0 ? q[i][15:8] : q[i][7:0];
        for (int k = 0; k < 8; k++) begin
          logic fb;
          fb = c[0] ^ b[k];
          c = {1'b0, c[31:1]};
          if (fb) c = c ^ 32'hEDB88320;
        end
      end
    end
    return ~c;
  endfunction

  // pad to 60 octets and append the FCS
  function automatic wq_t finish(wq_t q);
    logic [31:0] f;
    while (q.size() < 30) q.push_back(16'h0000);
    f = crc_bytes(q, q.size());
    q.push_back({f[7:0], f[15:8]});
    q.push_back({f[23:16], f[31:24]});
    return q;
  endfunction

  // true if the last two words are the right FCS
  function automatic bit fcs_ok(wq_t q);
    logic [31:0] f;
    if (q.size() < 4) return 0;
    f = crc_bytes(q, q.size() - 2);
    return q[q.size()-2] == {f[7:0], f[15:8]} && q[q.size()-1] == {f[23:16], f[31:24]};
  endfunction

  function automatic void push_mac(ref wq_t q, input logic [47:0] m);
    q.push_back(m[47:32]); q.push_back(m[31:16]); q.push_back(m[15:0]);
  endfunction

  function automatic void push32(ref wq_t q, input logic [31:0] v);
    q.push_back(v[31:16]); q.push_back(v[15:0]);
  endfunction

  function automatic wq_t arp_request(logic [47:0] dst_mac, logic [31:0] target_ip);
    wq_t q;
    push_mac(q, dst_mac); push_mac(q, PC_MAC); q.push_back(16'h0806);
    q.push_back(16'h0001); q.push_back(16'h0800); q.push_back(16'h0604); q.push_back(16'h0001);
    push_mac(q, PC_MAC); push32(q, PC_IP);
    push_mac(q, 48'h0); push32(q, target_ip);
    return finish(q);
  endfunction

  // Ethernet + IPv4 header for a payload of l4_words words
  function automatic wq_t ip_header(logic [7:0] proto, int l4_words, logic [15:0] id);
    wq_t q;
    logic [15:0] c;
    push_mac(q, FN_MAC); push_mac(q, PC_MAC); q.push_back(16'h0800);
    q.push_back(16'h4500); q.push_back(16'(20 + 2 * l4_words)); q.push_back(id);
    q.push_back(16'h4000); q.push_back({8'd64, proto}); q.push_back(16'h0000);
    push32(q, PC_IP); push32(q, FN_IP);
    c = ~csum(q, 7, 17);
    q[12] = c;
    return q;
  endfunction

  function automatic wq_t icmp_echo(logic [15:0] id, logic [15:0] seq, int ndata);
    wq_t q;
    logic [15:0] c;
    q = ip_header(8'd1, 4 + ndata, 16'h1234);
    q.push_back(16'h0800); q.push_back(16'h0000); q.push_back(id); q.push_back(seq);
    for (int i = 0; i < ndata; i++) q.push_back(16'(i * 257 + 3));
    c = ~csum(q, 17, q.size());
    q[18] = c;
    return finish(q);
  endfunction

  // UDP register access request: request word, then accesses {addr, data}
  function automatic wq_t udp_req(logic [15:0] sport, logic [15:0] dport, logic [15:0] req,
                                  logic [31:0] addrs[$], logic [31:0] datas[$]);
    wq_t q;
    int n;
    logic [15:0] c;
    n = 4 + 4 + 4 * addrs.size();
    q = ip_header(8'd17, n, 16'h2222);
    q.push_back(sport); q.push_back(dport); q.push_back(16'(2 * n)); q.push_back(16'h0000);
    q.push_back(16'h0000); q.push_back(16'h0000); q.push_back(req); q.push_back(16'h0000);
    foreach (addrs[i]) begin
      push32(q, addrs[i]); push32(q, datas[i]);
    end
    c = ~csum(q, 17, q.size(), 32'(csum(q, 13, 17)) + 32'd17 + 32'(2 * n));
    q[20] = (c == 0) ? 16'hFFFF : c;
    return finish(q);
  endfunction

  function automatic wq_t tcp_seg(logic [15:0] sport, logic [15:0] dport, logic [31:0] seq,
                                  logic [31:0] ack, logic [7:0] flags, logic [15:0] win);
    wq_t q;
    logic [15:0] c;
    q = ip_header(8'd6, 10, 16'h3333);
    q.push_back(sport); q.push_back(dport); push32(q, seq); push32(q, ack);
    q.push_back({4'd5, 4'd0, flags}); q.push_back(win); q.push_back(16'h0000); q.push_back(16'h0000);
    c = ~csum(q, 17, q.size(), 32'(csum(q, 13, 17)) + 32'd6 + 32'd20);
    q[25] = c;
    return finish(q);
  endfunction

  // checks on a received frame (FCS already stripped is not assumed)
  function automatic bit ip_csum_ok(wq_t q);
    return csum(q, 7, 17) == 16'hFFFF;
  endfunction

  function automatic bit l4_csum_ok(wq_t q, logic [7:0] proto);
    int l4_end;
    l4_end = 7 + int'(q[8]) / 2;
    if (proto == 8'd1) return csum(q, 17, l4_end) == 16'hFFFF;
    return csum(q, 17, l4_end, 32'(csum(q, 13, 17)) + 32'(proto) + 32'(q[8] - 16'd20)) == 16'hFFFF;
  endfunction

endpackage
