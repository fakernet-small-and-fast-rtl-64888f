// fnet_pkg: constants, types and functions shared by the Fakernet modules.
//
// All packet data is handled as 16-bit words, the first octet on the wire in
// bits [15:8]. Word indices below count from the first octet of the
// destination MAC address (the preamble and SFD are not stored). The layout
// follows the standard Ethernet/ARP/IPv4/ICMP/UDP/TCP headers without options;
// the register-access layout after the UDP header (status, status, request,
// reply, then address+data pairs) follows the paper's packet drawing, while the
// bit assignments inside those words are this design's own choice.
//
// Some offsets and constants are listed for completeness of the layout
// even where no module refers to them by name.
package fnet_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int PKT_AW     = 10;          // packet RAM address bits (1024 words = 2 kiB)
  localparam int MIN_WORDS  = 30;          // 60-octet minimum frame without FCS

  // ---------------------------------------------------------------- word offsets
  localparam int W_ETH_DST  = 0;           // 3 words
  localparam int W_ETH_SRC  = 3;           // 3 words
  localparam int W_ETHTYPE  = 6;
  // ARP
  localparam int W_ARP_HTYPE = 7;
  localparam int W_ARP_PTYPE = 8;
  localparam int W_ARP_LENS  = 9;
  localparam int W_ARP_OPER  = 10;
  localparam int W_ARP_SHA   = 11;         // 3 words
  localparam int W_ARP_SPA   = 14;         // 2 words
  localparam int W_ARP_THA   = 16;         // 3 words
  localparam int W_ARP_TPA   = 19;         // 2 words
  // IPv4
  localparam int W_IP_VER   = 7;
  localparam int W_IP_LEN   = 8;
  localparam int W_IP_ID    = 9;
  localparam int W_IP_FRAG  = 10;
  localparam int W_IP_PROTO = 11;          // {ttl, proto}
  localparam int W_IP_CSUM  = 12;
  localparam int W_IP_SRC   = 13;          // 2 words
  localparam int W_IP_DST   = 15;          // 2 words
  localparam int W_L4       = 17;          // first word after the IP header
  // ICMP
  localparam int W_ICMP_TYPE = 17;
  localparam int W_ICMP_CSUM = 18;
  // UDP
  localparam int W_UDP_SPORT = 17;
  localparam int W_UDP_DPORT = 18;
  localparam int W_UDP_LEN   = 19;
  localparam int W_UDP_CSUM  = 20;
  localparam int W_RA_STAT0  = 21;         // register access: status
  localparam int W_RA_STAT1  = 22;         // register access: status
  localparam int W_RA_REQ    = 23;         // register access: request
  localparam int W_RA_REPLY  = 24;         // register access: reply
  localparam int W_RA_DATA   = 25;         // first access (addr hi, addr lo, data hi, data lo)
  // TCP
  localparam int W_TCP_SPORT = 17;
  localparam int W_TCP_DPORT = 18;
  localparam int W_TCP_SEQ   = 19;         // 2 words
  localparam int W_TCP_ACK   = 21;         // 2 words
  localparam int W_TCP_FLAGS = 23;         // {offset, reserved, flags}
  localparam int W_TCP_WIN   = 24;
  localparam int W_TCP_CSUM  = 25;
  localparam int W_TCP_URG   = 26;
  localparam int TCP_HDR_END = 27;         // words of headers of a TCP packet without options

  // TCP flag bits (low byte of the flags word)
  localparam logic [7:0] TCP_FIN = 8'h01;
  localparam logic [7:0] TCP_SYN = 8'h02;
  localparam logic [7:0] TCP_RST = 8'h04;
  localparam logic [7:0] TCP_PSH = 8'h08;
  localparam logic [7:0] TCP_ACK = 8'h10;

  // ---------------------------------------------------------------- register access words
  // request word: [15:14] command, [13:12] zero, [11:0] sequence number / token
  typedef enum logic [1:0] {
    RA_ACCESS = 2'b00,
    RA_ARM    = 2'b01,
    RA_RESET  = 2'b10
  } ra_cmd_e;

  // address word flags (bits of the 32-bit address of an access)
  localparam int RA_BIT_READ     = 31;
  localparam int RA_BIT_WRITE    = 30;
  localparam int RA_BIT_DONE     = 29;     // set in the response for a successful access
  localparam int RA_BIT_INTERNAL = 27;     // the 28th address bit: Fakernet internal register
  localparam int REG_AW          = 25;     // reg_addr width

  // ---------------------------------------------------------------- TCP connection state
  typedef enum logic [1:0] {
    TCP_CLOSED  = 2'd0,   // after reset: waiting for a SYN to take as template
    TCP_SYN_RCVD = 2'd1,  // template taken, SYN-ACK to be / has been sent
    TCP_ESTAB   = 2'd2    // SYN-ACK acknowledged: data may flow
  } tcp_state_e;

  // ---------------------------------------------------------------- RAM port structs
  typedef struct packed {
    logic              en;
    logic [PKT_AW-1:0] addr;
    logic [15:0]       data;
  } pkt_wr_t;

  // request from TCP control to the TCP prepare FSM
  typedef struct packed {
    logic [31:0] start;   // stream offset in octets of the first payload octet
    logic [15:0] len;     // payload octets (multiple of 4)
    logic [7:0]  flags;   // TCP flags
    logic        retrans; // packet is a retransmission
  } tcp_req_t;

  // ---------------------------------------------------------------- functions
  // 16-bit ones' complement (end-around carry) addition
  function automatic logic [15:0] oc_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

  // Ethernet CRC-32 (reflected polynomial 0xEDB88320), one octet, LSB first
  function automatic logic [31:0] crc32_octet(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 32'hEDB88320;
      else             c = c >> 1;
    end
    return c;
  endfunction

  // CRC over one 16-bit word, the octet in [15:8] first
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [15:0] w);
    return crc32_octet(crc32_octet(crc, w[15:8]), w[7:0]);
  endfunction

  localparam logic [31:0] CRC_INIT    = 32'hFFFF_FFFF;
  localparam logic [31:0] CRC_RESIDUE = 32'hDEBB_20E3;  // register value after data+FCS

endpackage
