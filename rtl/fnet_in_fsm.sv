// fnet_in_fsm: input packet parser and on-the-fly response writer.
//
// Every incoming 16-bit word is checked against what is acceptable at its
// position (Ethernet, then ARP or IPv4, then ICMP, UDP with the register
// access header, or TCP). The first unacceptable word sends the parser back to
// IDLE and the packet is ignored. While parsing, each word is also written,
// possibly modified and at a shifted position, to every response memory that
// could need it: the ARP/ICMP/UDP response RAM, the register access RAM and
// (while no TCP connection exists) the TCP template RAM. Source and
// destination fields swap places (+/-3 words for the MACs, +/-2 for the IP
// addresses, +/-1 for the ports, +/-5 for the ARP addresses), local addresses
// are filled in, padding is cleared. Only when the final FCS word checks out
// (and the IP, ICMP, UDP, TCP checksums did) is a response committed to its
// memory; otherwise the partially written memory is simply never marked ready.
// State (UDP channels, TCP acknowledgements) changes only on such a commit,
// so a dropped packet leaves no trace.
//
// UDP register access channels: channel 0 (port UDP_PORT_BASE) is idempotent
// and takes any access request. Channels 1.. need an arm request (answered
// with a token in the reply word, only if the channel is free or has not been
// used for two timeout_tick periods), then a reset request carrying that token
// (answered with the first sequence number, which binds the client IP address
// and port). Accesses must then carry the next sequence number; a repeat of
// the current one makes the register result RAM send its previous response
// again, if it still holds it.
//
// TCP: a SYN to TCP_PORT while the connection is closed is stored as the
// template (addresses swapped, acknowledgement field = their sequence + 1) and
// reported with syn_commit. Segments with ACK whose acknowledgement lies in
// [base, front] are reported with their window through ack_commit.
//
// Interface: in_newpacket pulses before the first word of a frame, in_gotword
// marks each valid in_word (first octet in [15:8]); the frame ends with the
// 4-octet FCS, its end found from the ARP size or the IP total length.
// Response RAM writes are registered (one clock after the word). The
// positions, the parsing order and the swap offsets follow the paper; the
// register access word encodings, port numbers, token and sequence number
// choices are this design's own.
//
// Only the flag byte of the stored TCP flags word is used after parsing
// (the data offset is checked when the word arrives).
module fnet_in_fsm
  import fnet_pkg::*;
#(
  parameter int          NUM_UDP_CH    = 2,
  parameter logic [15:0] UDP_PORT_BASE = 16'd1,
  parameter logic [15:0] TCP_PORT      = 16'd1
) (
  input  logic        clk,
  input  logic        rst,
  // packet input
  input  logic [15:0] in_word,
  input  logic        in_gotword,
  input  logic        in_newpacket,
  // configuration
  input  logic [47:0] cfg_macaddr,
  input  logic [31:0] cfg_ipaddr,
  input  logic        timeout_tick,
  input  logic [15:0] status0,
  input  logic [15:0] status1,
  // ARP/ICMP/UDP response RAM
  output pkt_wr_t     resp_wr,
  output logic        resp_commit,
  output logic [PKT_AW:0] resp_len,
  input  logic        resp_ready,
  // register access RAM
  output pkt_wr_t     ra_wr,
  output logic        ra_commit,
  output logic [PKT_AW:0] ra_len,
  input  logic        ra_ready,
  // register result RAM: resend the previous response
  output logic        rr_resend,
  input  logic        rr_ready,
  input  logic        regacc_busy,
  // TCP template RAM (32 words)
  output logic        tpl_wr_en,
  output logic [4:0]  tpl_wr_addr,
  output logic [15:0] tpl_wr_data,
  // TCP state
  input  tcp_state_e  tcp_state,
  input  logic [31:0] tcp_base_seq,
  input  logic [31:0] tcp_front_seq,
  output logic        syn_commit,
  output logic        ack_commit,
  output logic [31:0] ack_seq,
  output logic [15:0] ack_win,
  // status / debug
  output logic [NUM_UDP_CH-1:0] udp_ch_active,
  output logic        ev_rx_good,
  output logic        ev_rx_bad,
  output logic        ev_arp,
  output logic        ev_icmp,
  output logic        ev_udp,
  output logic        ev_tcp
);
  localparam int CW = (NUM_UDP_CH > 1) ? $clog2(NUM_UDP_CH) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_ETH, S_ARP, S_IPV4, S_ICMP, S_UDP_HDR, S_RA_HDR, S_DATA,
    S_TCP_HDR, S_PAD, S_FCS
  } state_e;

  typedef enum logic [2:0] {
    K_NONE, K_ARP, K_ICMP, K_UDP, K_TCP
  } kind_e;

  // what a UDP request leads to
  typedef enum logic [2:0] {
    U_NONE, U_ACCESS, U_RESEND, U_ARM, U_RESET
  } uact_e;

  state_e          state;
  kind_e           kind;
  uact_e           uact;
  logic [PKT_AW:0] widx;        // index of the word being received
  logic [PKT_AW:0] l4_end;      // first word after the IP payload
  logic [PKT_AW:0] fcs_idx;     // first FCS word
  logic [31:0]     crc;
  logic [15:0]     ip_sum, l4_sum, pseudo_sum, out_sum;
  logic [15:0]     l4_len;
  logic            dst_is_me;
  logic            resp_en, ra_en, tpl_en;
  logic [31:0]     src_ip;
  logic [15:0]     src_port;
  logic            l4_csum_zero;
  logic [CW-1:0]   ch;
  logic [11:0]     req_seq;
  logic [11:0]     reply_val;
  logic [15:0]     seq_hi, ack_hi, tcp_flags_w;
  logic            seq_carry;   // carry of seq_lo + 1 into the high word
  logic [31:0]     ack_val;
  logic [15:0]     win_val;
  logic [11:0]     token_ctr;

  // UDP channel state
  logic            ch_active [NUM_UDP_CH];
  logic            ch_armed  [NUM_UDP_CH];
  logic [11:0]     ch_token  [NUM_UDP_CH];
  logic [11:0]     ch_seq    [NUM_UDP_CH];
  logic [31:0]     ch_ip     [NUM_UDP_CH];
  logic [15:0]     ch_port   [NUM_UDP_CH];
  logic [1:0]      ch_age    [NUM_UDP_CH];
  // which request the register result RAM answers
  logic [CW-1:0]   last_ra_ch;
  logic [11:0]     last_ra_seq;
  logic            last_ra_valid;

  always_comb
    for (int c = 0; c < NUM_UDP_CH; c++) udp_ch_active[c] = ch_active[c];

  function automatic logic [15:0] mac_word(input logic [47:0] m, input int i);
    return m[47-16*i -: 16];
  endfunction

  // state after the word at index i of a header or payload
  function automatic state_e after_hdr(input logic [PKT_AW:0] i);
    if (i + 1'b1 < l4_end)  return S_DATA;
    if (i + 1'b1 < fcs_idx) return S_PAD;
    return S_FCS;
  endfunction

  // -------------------------------------------------------------------------
  always_ff @(posedge clk) begin
    // defaults
    logic            fail;
    logic [31:0]     crc_n;
    logic [PKT_AW:0] oaddr;
    logic [15:0]     odata, rdata, tdata;
    logic            ow_resp, ow_ra, ow_tpl;
    logic [PKT_AW:0] taddr;
    logic [15:0]     w;
    logic            last;
    logic [16:0]     seq_lo_inc;
    resp_commit <= 1'b0;
    ra_commit   <= 1'b0;
    rr_resend   <= 1'b0;
    syn_commit  <= 1'b0;
    ack_commit  <= 1'b0;
    ev_rx_good  <= 1'b0;
    ev_rx_bad   <= 1'b0;
    ev_arp      <= 1'b0;
    ev_icmp     <= 1'b0;
    ev_udp      <= 1'b0;
    ev_tcp      <= 1'b0;
    resp_wr.en  <= 1'b0;
    ra_wr.en    <= 1'b0;
    tpl_wr_en   <= 1'b0;
    token_ctr   <= token_ctr + 12'd1;

    if (timeout_tick)
      for (int c = 0; c < NUM_UDP_CH; c++)
        if (ch_age[c] != 2'd2) ch_age[c] <= ch_age[c] + 2'd1;

    w = in_word;
    fail = 1'b0;
    last = 1'b0;
    crc_n = crc32_word(crc, w);
    oaddr = widx;
    odata = w;
    rdata = w;      // value for the register access RAM where it differs
    tdata = w;
    taddr = widx;
    ow_resp = 1'b1;
    ow_ra = 1'b1;
    ow_tpl = 1'b0;
    seq_lo_inc = {1'b0, w} + 17'd1;

    if (in_newpacket) begin
      state      <= S_ETH;
      widx       <= '0;
      crc        <= CRC_INIT;
      ip_sum     <= 16'h0000;
      l4_sum     <= 16'h0000;
      pseudo_sum <= 16'h0000;
      out_sum    <= 16'h0000;
      kind       <= K_NONE;
      uact       <= U_NONE;
      dst_is_me  <= 1'b1;
      resp_en    <= !resp_ready;
      ra_en      <= !ra_ready;
      tpl_en     <= (tcp_state == TCP_CLOSED);
    end else if (in_gotword && state != S_IDLE) begin
      crc  <= crc_n;
      widx <= widx + 1'b1;
      // checksum accumulation
      if (widx >= (PKT_AW+1)'(W_IP_VER) && widx < (PKT_AW+1)'(W_L4)) ip_sum <= oc_add(ip_sum, w);
      if (widx >= (PKT_AW+1)'(W_IP_SRC) && widx < (PKT_AW+1)'(W_L4)) pseudo_sum <= oc_add(pseudo_sum, w);
      if (widx >= (PKT_AW+1)'(W_L4) && widx < l4_end) l4_sum <= oc_add(l4_sum, w);

      // ---- Ethernet header: both ARP and IPv4 use the same swap
      if (widx < (PKT_AW+1)'(W_ETH_SRC)) begin
        if (w != mac_word(cfg_macaddr, int'(widx))) dst_is_me <= 1'b0;
        oaddr = widx + (PKT_AW+1)'(3);
        odata = mac_word(cfg_macaddr, int'(widx));
      end else if (widx < (PKT_AW+1)'(W_ETHTYPE)) begin
        oaddr = widx - (PKT_AW+1)'(3);
      end
      if (widx < (PKT_AW+1)'(W_ETHTYPE)) begin
        rdata = odata;
        tdata = odata;
        taddr = oaddr;
        ow_tpl = 1'b1;
      end

      unique case (state)
        S_ETH: begin
          if (widx == (PKT_AW+1)'(W_ETHTYPE)) begin
            ow_tpl = 1'b1;
            if (w == 16'h0806) begin
              kind  <= K_ARP;
              state <= S_ARP;
            end else if (w == 16'h0800 && dst_is_me) begin
              state <= S_IPV4;
            end else fail = 1'b1;
          end
        end

        S_ARP: begin
          unique case (int'(widx))
            W_ARP_HTYPE: fail = (w != 16'h0001);
            W_ARP_PTYPE: fail = (w != 16'h0800);
            W_ARP_LENS:  fail = (w != 16'h0604);
            W_ARP_OPER:  begin fail = (w != 16'h0001); odata = 16'h0002; end
            11, 12, 13, 14, 15: oaddr = widx + (PKT_AW+1)'(5);
            16, 17, 18: begin
              oaddr = widx - (PKT_AW+1)'(5);
              odata = mac_word(cfg_macaddr, int'(widx) - W_ARP_THA);
            end
            19, 20: begin
              oaddr = widx - (PKT_AW+1)'(5);
              odata = (widx == (PKT_AW+1)'(W_ARP_TPA)) ? cfg_ipaddr[31:16] : cfg_ipaddr[15:0];
              if (w != odata) fail = 1'b1;
            end
            default: ;
          endcase
          if (widx == (PKT_AW+1)'(W_ARP_TPA + 1)) begin
            l4_end  <= (PKT_AW+1)'(W_ARP_TPA + 2);
            fcs_idx <= (PKT_AW+1)'(MIN_WORDS);
            state   <= S_PAD;
          end
        end

        S_IPV4: begin
          ow_tpl = 1'b1;
          unique case (int'(widx))
            W_IP_VER:  fail = (w[15:8] != 8'h45);
            W_IP_LEN: begin
              l4_len <= w - 16'd20;
              l4_end <= (PKT_AW+1)'(W_IP_VER) + (PKT_AW+1)'(w[15:1]);
              fcs_idx <= ((PKT_AW+1)'(W_IP_VER) + (PKT_AW+1)'(w[15:1]) > (PKT_AW+1)'(MIN_WORDS)) ?
                         (PKT_AW+1)'(W_IP_VER) + (PKT_AW+1)'(w[15:1]) : (PKT_AW+1)'(MIN_WORDS);
              // even length, room for a UDP/ICMP/TCP header, fits the RAMs
              fail = w[0] || (w < 16'd28) || ({1'b0, w[15:1]} + 17'(W_IP_VER) > 17'(2**PKT_AW));
            end
            W_IP_FRAG: fail = (w[13:0] != 14'd0) || w[15];
            W_IP_PROTO: begin
              if (w[7:0] == 8'd1)       kind <= K_ICMP;
              else if (w[7:0] == 8'd17) kind <= K_UDP;
              else if (w[7:0] == 8'd6)  kind <= K_TCP;
              else fail = 1'b1;
            end
            13, 14: begin
              oaddr = widx + (PKT_AW+1)'(2);
              if (widx == (PKT_AW+1)'(W_IP_SRC)) src_ip[31:16] <= w; else src_ip[15:0] <= w;
            end
            15, 16: begin
              oaddr = widx - (PKT_AW+1)'(2);
              if (w != ((widx == (PKT_AW+1)'(W_IP_DST)) ? cfg_ipaddr[31:16] : cfg_ipaddr[15:0])) fail = 1'b1;
            end
            default: ;
          endcase
          rdata = odata;
          tdata = odata;
          taddr = oaddr;
          if (widx == (PKT_AW+1)'(W_IP_DST + 1)) begin
            if (oc_add(ip_sum, w) != 16'hFFFF) fail = 1'b1;
            unique case (kind)
              K_ICMP:  state <= S_ICMP;
              K_UDP:   state <= S_UDP_HDR;
              default: state <= S_TCP_HDR;
            endcase
          end
        end

        S_ICMP: begin
          if (widx == (PKT_AW+1)'(W_ICMP_TYPE)) begin
            fail  = (w != 16'h0800);          // echo request, code 0
            odata = 16'h0000;                 // echo reply
          end else if (widx == (PKT_AW+1)'(W_ICMP_CSUM)) begin
            odata = ~oc_add(~w, 16'hF7FF);    // incremental update for 0x0800 -> 0x0000
          end
          if (widx == (PKT_AW+1)'(W_ICMP_CSUM)) state <= after_hdr(widx);
        end

        S_UDP_HDR: begin
          unique case (int'(widx))
            W_UDP_SPORT: begin
              oaddr = widx + 1'b1;
              src_port <= w;
            end
            W_UDP_DPORT: begin
              oaddr = widx - 1'b1;
              if (w < UDP_PORT_BASE || w >= UDP_PORT_BASE + 16'(NUM_UDP_CH)) fail = 1'b1;
              ch <= CW'(w - UDP_PORT_BASE);
            end
            W_UDP_LEN: fail = (w != l4_len) || (w < 16'd16) || (w[2:0] != 3'd0);
            W_UDP_CSUM: l4_csum_zero <= (w == 16'h0000);
            default: ;
          endcase
          rdata = odata;
          if (widx == (PKT_AW+1)'(W_UDP_CSUM)) state <= S_RA_HDR;
        end

        S_RA_HDR: begin
          unique case (int'(widx))
            W_RA_STAT0: odata = status0;
            W_RA_STAT1: odata = status1;
            W_RA_REQ: begin
              req_seq <= w[11:0];
              if (w[13:12] != 2'b00) fail = 1'b1;
              else if (ch == '0) begin
                if (ra_cmd_e'(w[15:14]) == RA_ACCESS) uact <= U_ACCESS;
                else fail = 1'b1;
              end else begin
                unique case (ra_cmd_e'(w[15:14]))
                  RA_ACCESS: begin
                    if (!ch_active[ch] || ch_ip[ch] != src_ip || ch_port[ch] != src_port) fail = 1'b1;
                    else if (w[11:0] == ch_seq[ch] + 12'd1) uact <= U_ACCESS;
                    else if (w[11:0] == ch_seq[ch])         uact <= U_RESEND;
                    else fail = 1'b1;
                  end
                  RA_ARM: begin
                    if (ch_active[ch] && ch_age[ch] != 2'd2) fail = 1'b1;
                    else begin
                      uact      <= U_ARM;
                      reply_val <= token_ctr;
                    end
                  end
                  RA_RESET: begin
                    if (!ch_armed[ch] || ch_token[ch] != w[11:0]) fail = 1'b1;
                    else begin
                      uact      <= U_RESET;
                      reply_val <= w[11:0];   // first sequence number n = token
                    end
                  end
                  default: fail = 1'b1;
                endcase
              end
            end
            W_RA_REPLY: begin
              odata = {in_word[15:12], reply_val};
              odata[15:14] = (uact == U_ARM) ? 2'(RA_ARM) : 2'(RA_RESET);
              rdata = w;
            end
            default: ;
          endcase
          if (widx == (PKT_AW+1)'(W_RA_STAT0) || widx == (PKT_AW+1)'(W_RA_STAT1)) rdata = odata;
          if (widx == (PKT_AW+1)'(W_RA_REPLY)) state <= after_hdr(widx);
        end

        S_TCP_HDR: begin
          unique case (int'(widx))
            W_TCP_SPORT: oaddr = widx + 1'b1;
            W_TCP_DPORT: begin
              oaddr = widx - 1'b1;
              fail  = (w != TCP_PORT);
            end
            19: seq_hi <= w;
            20: begin
              taddr = (PKT_AW+1)'(W_TCP_ACK + 1);
              tdata = seq_lo_inc[15:0];
              seq_carry <= seq_lo_inc[16];
            end
            21: begin
              ack_hi <= w;
              taddr  = (PKT_AW+1)'(W_TCP_ACK);
              tdata  = seq_hi + {15'd0, seq_carry};
            end
            22: ack_val <= {ack_hi, w};
            W_TCP_FLAGS: begin
              tcp_flags_w <= w;
              if (w[15:12] < 4'd5) fail = 1'b1;
              else if ((w[7:0] & (TCP_SYN | TCP_ACK | TCP_RST)) == TCP_SYN) begin
                if (tcp_state != TCP_CLOSED) fail = 1'b1;   // connected: ignore the attempt
              end else if ((w[7:0] & (TCP_SYN | TCP_ACK)) == TCP_ACK) begin
                if (tcp_state == TCP_CLOSED) fail = 1'b1;
              end else fail = 1'b1;
            end
            W_TCP_WIN: win_val <= w;
            default: ;
          endcase
          // template: swapped ports and the acknowledgement field
          if (widx <= (PKT_AW+1)'(W_TCP_DPORT)) taddr = oaddr;
          ow_tpl = (widx <= (PKT_AW+1)'(W_TCP_DPORT)) || widx == (PKT_AW+1)'(W_TCP_SEQ + 1) ||
                   widx == (PKT_AW+1)'(W_TCP_ACK);
          ow_resp = 1'b0;
          ow_ra   = 1'b0;
          if (widx == (PKT_AW+1)'(TCP_HDR_END - 1)) state <= after_hdr(widx);
        end

        S_DATA: begin
          if (kind == K_TCP) begin
            ow_resp = 1'b0;
            ow_ra   = 1'b0;
          end
          state <= after_hdr(widx);
        end

        S_PAD: begin
          odata = 16'h0000;
          rdata = 16'h0000;
          if (kind == K_TCP) begin
            ow_resp = 1'b0;
            ow_ra   = 1'b0;
          end
          if (widx + 1'b1 >= fcs_idx) state <= S_FCS;
        end

        S_FCS: begin
          ow_resp = 1'b0;
          ow_ra   = 1'b0;
          // write the computed UDP checksum of an arm/reset response
          if (widx == fcs_idx && kind == K_UDP) begin
            ow_resp = 1'b1;
            oaddr   = (PKT_AW+1)'(W_UDP_CSUM);
            odata   = (~out_sum == 16'h0000) ? 16'hFFFF : ~out_sum;
          end
          if (widx == fcs_idx + 1'b1) last = 1'b1;
        end

        default: ;
      endcase

      // outgoing UDP checksum: pseudo header and the response words
      if (kind == K_UDP) begin
        if (widx >= (PKT_AW+1)'(W_IP_SRC) && widx < (PKT_AW+1)'(W_L4)) out_sum <= oc_add(out_sum, odata);
        else if (widx == (PKT_AW+1)'(W_UDP_LEN)) out_sum <= oc_add(oc_add(out_sum, odata), oc_add(odata, 16'h0011));
        else if (widx >= (PKT_AW+1)'(W_L4) && widx < l4_end && widx != (PKT_AW+1)'(W_UDP_CSUM)) out_sum <= oc_add(out_sum, odata);
      end

      if (ow_resp && resp_en) begin
        resp_wr.en   <= 1'b1;
        resp_wr.addr <= oaddr[PKT_AW-1:0];
        resp_wr.data <= odata;
      end
      if (ow_ra && ra_en && (kind == K_UDP || state == S_ETH || state == S_IPV4)) begin
        ra_wr.en   <= 1'b1;
        ra_wr.addr <= oaddr[PKT_AW-1:0];
        ra_wr.data <= rdata;
      end
      if (ow_tpl && tpl_en && taddr < (PKT_AW+1)'(TCP_HDR_END)) begin
        tpl_wr_en   <= 1'b1;
        tpl_wr_addr <= taddr[4:0];
        tpl_wr_data <= tdata;
      end

      if (fail) begin
        state     <= S_IDLE;
        ev_rx_bad <= 1'b1;
      end else if (last) begin
        logic ok;
        logic [15:0] l4_total;
        state <= S_IDLE;
        ok = (crc_n == CRC_RESIDUE);
        l4_total = oc_add(l4_sum, oc_add(pseudo_sum, oc_add(l4_len, (kind == K_UDP) ? 16'd17 : 16'd6)));
        unique case (kind)
          K_ICMP: ok = ok && (l4_sum == 16'hFFFF);
          K_UDP:  ok = ok && (l4_csum_zero || l4_total == 16'hFFFF);
          K_TCP:  ok = ok && (l4_total == 16'hFFFF);
          default: ;
        endcase
        if (kind == K_TCP && (tcp_flags_w[7:0] & TCP_SYN) == 8'h00 &&
            (ack_val - tcp_base_seq) > (tcp_front_seq - tcp_base_seq)) ok = 1'b0;
        if (!ok) ev_rx_bad <= 1'b1;
        else begin
          ev_rx_good <= 1'b1;
          unique case (kind)
            K_ARP:  begin ev_arp  <= 1'b1; resp_commit <= resp_en; end
            K_ICMP: begin ev_icmp <= 1'b1; resp_commit <= resp_en; end
            K_UDP: begin
              ev_udp <= 1'b1;
              unique case (uact)
                U_ACCESS: if (ra_en) begin
                  ra_commit     <= 1'b1;
                  last_ra_ch    <= ch;
                  last_ra_seq   <= req_seq;
                  last_ra_valid <= (ch != '0);
                  if (ch != '0) begin
                    ch_seq[ch] <= req_seq;
                    ch_age[ch] <= 2'd0;
                  end
                end
                U_RESEND:
                  if (last_ra_valid && last_ra_ch == ch && last_ra_seq == req_seq &&
                      !ra_ready && !regacc_busy && !rr_ready) rr_resend <= 1'b1;
                U_ARM: if (resp_en) begin
                  resp_commit    <= 1'b1;
                  ch_armed[ch]   <= 1'b1;
                  ch_token[ch]   <= reply_val;
                end
                U_RESET: if (resp_en) begin
                  resp_commit    <= 1'b1;
                  ch_armed[ch]   <= 1'b0;
                  ch_active[ch]  <= 1'b1;
                  ch_seq[ch]     <= reply_val;
                  ch_ip[ch]      <= src_ip;
                  ch_port[ch]    <= src_port;
                  ch_age[ch]     <= 2'd0;
                end
                default: ;
              endcase
            end
            K_TCP: begin
              ev_tcp <= 1'b1;
              if ((tcp_flags_w[7:0] & TCP_SYN) != 8'h00) syn_commit <= tpl_en;
              else begin
                ack_commit <= 1'b1;
                ack_seq    <= ack_val;
                ack_win    <= win_val;
              end
            end
            default: ;
          endcase
        end
      end
    end

    if (rst) begin
      state         <= S_IDLE;
      widx          <= '0;
      token_ctr     <= 12'h5A3;
      last_ra_valid <= 1'b0;
      resp_commit   <= 1'b0;
      ra_commit     <= 1'b0;
      rr_resend     <= 1'b0;
      syn_commit    <= 1'b0;
      ack_commit    <= 1'b0;
      resp_wr.en    <= 1'b0;
      ra_wr.en      <= 1'b0;
      tpl_wr_en     <= 1'b0;
      for (int c = 0; c < NUM_UDP_CH; c++) begin
        ch_active[c] <= 1'b0;
        ch_armed[c]  <= 1'b0;
        ch_age[c]    <= 2'd2;
        ch_seq[c]    <= 12'd0;
        ch_token[c]  <= 12'd0;
        ch_ip[c]     <= 32'd0;
        ch_port[c]   <= 16'd0;
      end
    end
  end

  assign resp_len = fcs_idx;
  assign ra_len   = fcs_idx;
endmodule
