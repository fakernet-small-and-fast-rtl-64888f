// fakernet: FPGA-side TCP data source and UDP register access endpoint.
//
// Top level. Packets arrive as 16-bit words from a user-supplied PHY
// deserialiser and leave as 16-bit words to a serialiser; in between, a few
// state machines pass packet data one way through RAMs, each with a control
// block telling the consumer that a complete packet of a given length is
// there:
//
//   input FSM --> ARP/ICMP/UDP RAM -----------------------------> output FSM
//             --> reg. access RAM --> UDP reg. access FSM --> reg. result RAM -->
//             --> TCP template RAM --> TCP prepare FSM --> TCP RAM 1 / 2 -------->
//             --> (ack, window) --> TCP control --> (next packet) --^
//   user data --> fill control --> data buffer RAM --> TCP prepare FSM
//
// Responses to ARP, ICMP echo and UDP are built by rewriting the request while
// it is parsed; TCP packets are built from the SYN that opened the connection.
// The UDP register access FSM drives the user register interface (reg_*) and
// the internal registers (TCP reset, test limits, data generator, debug
// counters). All of this follows the paper's block diagram; widths, encodings
// and port numbers the paper leaves open are this design's choices and are
// listed in the individual modules.
//
// Interfaces (all on clk):
//   in_newpacket pulses before the first word of a frame (at the SFD),
//   in_gotword marks each valid in_word. out_word/out_ena/out_payload are held
//   until out_taken. reg_read/reg_write pulse for one cycle with reg_addr and
//   reg_data_wr held; reg_done within REG_TIMEOUT cycles marks success.
//   data_write writes data_word at data_offset of the current commit group,
//   data_commit commits data_commit_len words; data_free says another group
//   fits. slow_clock_tick (0.5..5 us period) clocks the RTT counters,
//   timeout_tick (about 1 s) ages the UDP channels.
//
// The TCP control's front pointer and the prepare FSM's busy flag are
// produced by those blocks for their testbenches and are not needed here.
module fakernet
  import fnet_pkg::*;
#(
  parameter int          NUM_UDP_CH    = 2,
  parameter int          BUF_AW        = 10,       // data buffer: 2**BUF_AW 32-bit words (4 kiB)
  parameter int          OFFSET_BITS   = 7,        // data_offset bits: max commit group 128 words
  parameter logic [15:0] UDP_PORT_BASE = 16'd1,
  parameter logic [15:0] TCP_PORT      = 16'd1,
  parameter logic [31:0] TCP_ISN       = 32'h0000_0000,
  parameter int          REG_TIMEOUT   = 10,
  parameter logic [15:0] MAX_PAYLOAD   = 16'd1440,
  parameter int          RTT_INIT      = 100,
  parameter logic [15:0] OUR_WINDOW    = 16'h1000
) (
  input  logic                   clk,
  input  logic                   rst,
  // Ethernet word interface
  input  logic [15:0]            in_word,
  input  logic                   in_gotword,
  input  logic                   in_newpacket,
  output logic [15:0]            out_word,
  output logic                   out_ena,
  output logic                   out_payload,
  input  logic                   out_taken,
  // configuration and ticks
  input  logic [47:0]            cfg_macaddr,
  input  logic [31:0]            cfg_ipaddr,
  input  logic                   slow_clock_tick,
  input  logic                   timeout_tick,
  // user register access
  output logic [REG_AW-1:0]      reg_addr,
  output logic [31:0]            reg_data_wr,
  input  logic [31:0]            reg_data_rd,
  output logic                   reg_write,
  output logic                   reg_read,
  input  logic                   reg_done,
  // TCP data send interface
  input  logic [31:0]            data_word,
  input  logic [OFFSET_BITS-1:0] data_offset,
  input  logic                   data_write,
  input  logic [OFFSET_BITS:0]   data_commit_len,
  input  logic                   data_commit,
  output logic                   data_free,
  output logic                   tcp_reset
);
  localparam int CNT_N = 8;

  // ---------------------------------------------------------------- signals
  pkt_wr_t         resp_wr, ra_wr, rr_wr, prep_wr;
  logic            resp_commit, ra_commit, rr_commit, rr_resend;
  logic [PKT_AW:0] resp_len_w, ra_len_w, rr_len_w, prep_len;
  logic            resp_ready, ra_ready, rr_ready;
  logic [PKT_AW:0] resp_len, ra_len, rr_len;
  logic            ra_release, regacc_busy;
  logic [PKT_AW-1:0] ra_rd_addr, out_rd_addr;
  logic [15:0]     ra_rd_data;
  logic [15:0]     src_data [4];
  logic [PKT_AW:0] src_len [4];
  logic [3:0]      src_ready, src_release;

  logic            tpl_wr_en;
  logic [4:0]      tpl_wr_addr, tpl_rd_addr;
  logic [15:0]     tpl_wr_data, tpl_rd_data;

  tcp_state_e      tcp_state;
  logic [31:0]     tcp_base, tcp_front, base_seq, front_seq, avail;
  logic            syn_commit, ack_commit;
  logic [31:0]     ack_seq;
  logic [15:0]     ack_win;
  logic            tcp_req_valid, tcp_req_take;
  tcp_req_t        tcp_req;
  logic [15:0]     rtt_est;
  logic            ev_retrans_dup, ev_retrans_timeout;

  logic            buf_wr_en;
  logic [BUF_AW-1:0] buf_wr_addr, buf_rd_addr;
  logic [31:0]     buf_wr_data, buf_rd_data;
  logic            overflow;

  logic [1:0]      prep_commit, prep_ready;
  logic            prep_sel, prep_busy;

  logic            int_write, int_read, int_done;
  logic [31:0]     int_data_rd;
  logic            tcp_reset_req;
  logic [15:0]     cfg_max_payload, cfg_win_limit;
  logic            gen_enable;
  logic [7:0]      gen_len;
  logic            cnt_rd_req, cnt_rd_valid;
  logic [2:0]      cnt_rd_addr;
  logic [31:0]     cnt_rd_data;

  logic [NUM_UDP_CH-1:0] udp_ch_active;
  logic            ev_rx_good, ev_rx_bad, ev_arp, ev_icmp, ev_udp, ev_tcp, ev_tx;
  logic [15:0]     status0, status1;

  // data interface after the generator multiplexer
  logic [31:0]            f_word, g_word;
  logic [OFFSET_BITS-1:0] f_offset, g_offset;
  logic                   f_write, g_write, f_commit, g_commit;
  logic [OFFSET_BITS:0]   f_commit_len, g_commit_len;

  // status words at the start of every register access response
  always_comb begin
    status0 = 16'h0000;
    for (int c = 0; c < NUM_UDP_CH && c < 8; c++) status0[8 + c] = udp_ch_active[c];
    status0[1:0] = tcp_state;
    status1 = {14'd0, 1'b0, overflow};   // [1] parity error: not implemented
  end

  // ---------------------------------------------------------------- input side
  fnet_in_fsm #(
    .NUM_UDP_CH(NUM_UDP_CH), .UDP_PORT_BASE(UDP_PORT_BASE), .TCP_PORT(TCP_PORT)
  ) u_in (
    .clk, .rst, .in_word, .in_gotword, .in_newpacket,
    .cfg_macaddr, .cfg_ipaddr, .timeout_tick, .status0, .status1,
    .resp_wr, .resp_commit, .resp_len(resp_len_w), .resp_ready,
    .ra_wr, .ra_commit, .ra_len(ra_len_w), .ra_ready,
    .rr_resend, .rr_ready, .regacc_busy,
    .tpl_wr_en, .tpl_wr_addr, .tpl_wr_data,
    .tcp_state, .tcp_base_seq(base_seq), .tcp_front_seq(front_seq),
    .syn_commit, .ack_commit, .ack_seq, .ack_win,
    .udp_ch_active, .ev_rx_good, .ev_rx_bad, .ev_arp, .ev_icmp, .ev_udp, .ev_tcp
  );

  fnet_pkt_buf u_resp_ram (
    .clk, .rst, .wr_en(resp_wr.en), .wr_addr(resp_wr.addr), .wr_data(resp_wr.data),
    .commit(resp_commit), .commit_len(resp_len_w), .resend(1'b0),
    .rd_addr(out_rd_addr), .rd_data(src_data[0]), .ready(resp_ready), .len(resp_len),
    .release_buf(src_release[0])
  );

  fnet_pkt_buf u_regacc_ram (
    .clk, .rst, .wr_en(ra_wr.en), .wr_addr(ra_wr.addr), .wr_data(ra_wr.data),
    .commit(ra_commit), .commit_len(ra_len_w), .resend(1'b0),
    .rd_addr(ra_rd_addr), .rd_data(ra_rd_data), .ready(ra_ready), .len(ra_len),
    .release_buf(ra_release)
  );

  // ---------------------------------------------------------------- register access
  fnet_regacc_fsm #(.REG_TIMEOUT(REG_TIMEOUT)) u_regacc (
    .clk, .rst, .ra_rd_addr, .ra_rd_data, .ra_ready, .ra_len, .ra_release,
    .rr_wr, .rr_commit, .rr_len(rr_len_w), .rr_ready, .busy(regacc_busy),
    .reg_addr, .reg_data_wr, .reg_data_rd, .reg_write, .reg_read, .reg_done,
    .int_write, .int_read, .int_data_rd, .int_done
  );

  fnet_pkt_buf u_regres_ram (
    .clk, .rst, .wr_en(rr_wr.en), .wr_addr(rr_wr.addr), .wr_data(rr_wr.data),
    .commit(rr_commit), .commit_len(rr_len_w), .resend(rr_resend),
    .rd_addr(out_rd_addr), .rd_data(src_data[1]), .ready(rr_ready), .len(rr_len),
    .release_buf(src_release[1])
  );

  fnet_int_regs #(.NUM_UDP_CH(NUM_UDP_CH), .CNT_AW(3), .MAX_PAYLOAD(MAX_PAYLOAD)) u_int_regs (
    .clk, .rst, .int_addr(reg_addr), .int_data_wr(reg_data_wr), .int_write, .int_read,
    .int_data_rd, .int_done, .udp_ch_active, .tcp_state, .overflow, .rtt_est,
    .tcp_reset_req, .cfg_max_payload, .cfg_win_limit, .gen_enable, .gen_len,
    .cnt_rd_req, .cnt_rd_addr, .cnt_rd_valid, .cnt_rd_data
  );

  fnet_debug_counters #(.N(CNT_N)) u_counters (
    .clk, .rst,
    .events({ev_retrans_dup | ev_retrans_timeout, ev_tx, ev_tcp, ev_udp, ev_icmp, ev_arp,
             ev_rx_bad, ev_rx_good}),
    .rd_req(cnt_rd_req), .rd_addr(cnt_rd_addr), .rd_valid(cnt_rd_valid), .rd_data(cnt_rd_data)
  );

  // ---------------------------------------------------------------- TCP
  fnet_dpram #(.AW(5), .DW(16)) u_tpl_ram (
    .clk, .wr_en(tpl_wr_en), .wr_addr(tpl_wr_addr), .wr_data(tpl_wr_data),
    .rd_addr(tpl_rd_addr), .rd_data(tpl_rd_data)
  );

  fnet_tcp_control #(.TCP_ISN(TCP_ISN), .RTT_BITS(16), .RTT_INIT(RTT_INIT)) u_tcp_ctrl (
    .clk, .rst, .tcp_reset(tcp_reset_req), .slow_tick(slow_clock_tick),
    .syn_commit, .ack_commit, .ack_seq, .ack_win, .avail,
    .cfg_max_payload, .cfg_win_limit,
    .req_valid(tcp_req_valid), .req(tcp_req), .req_take(tcp_req_take),
    .state(tcp_state), .base(tcp_base), .front(tcp_front), .base_seq, .front_seq,
    .rtt_est, .ev_retrans_dup, .ev_retrans_timeout
  );

  fnet_datagen #(.OFFSET_BITS(OFFSET_BITS)) u_datagen (
    .clk, .rst, .enable(gen_enable), .group_len(gen_len), .data_free,
    .data_word(g_word), .data_offset(g_offset), .data_write(g_write),
    .data_commit_len(g_commit_len), .data_commit(g_commit)
  );

  always_comb begin
    if (gen_enable) begin
      f_word = g_word; f_offset = g_offset; f_write = g_write;
      f_commit_len = g_commit_len; f_commit = g_commit;
    end else begin
      f_word = data_word; f_offset = data_offset; f_write = data_write;
      f_commit_len = data_commit_len; f_commit = data_commit;
    end
  end

  fnet_fill_control #(.BUF_AW(BUF_AW), .OFFSET_BITS(OFFSET_BITS)) u_fill (
    .clk, .rst, .tcp_reset(tcp_reset_req),
    .data_word(f_word), .data_offset(f_offset), .data_write(f_write),
    .data_commit_len(f_commit_len), .data_commit(f_commit),
    .data_free, .tcp_reset_out(tcp_reset),
    .buf_wr_en, .buf_wr_addr, .buf_wr_data, .base(tcp_base), .avail, .overflow
  );

  fnet_dpram #(.AW(BUF_AW), .DW(32)) u_data_buf (
    .clk, .wr_en(buf_wr_en), .wr_addr(buf_wr_addr), .wr_data(buf_wr_data),
    .rd_addr(buf_rd_addr), .rd_data(buf_rd_data)
  );

  fnet_tcp_prep #(.TCP_ISN(TCP_ISN), .BUF_AW(BUF_AW), .OUR_WINDOW(OUR_WINDOW)) u_tcp_prep (
    .clk, .rst, .req_valid(tcp_req_valid), .req(tcp_req), .req_take(tcp_req_take),
    .tpl_rd_addr, .tpl_rd_data, .buf_rd_addr, .buf_rd_data,
    .prep_wr, .prep_commit, .prep_len, .prep_sel, .prep_ready, .busy(prep_busy)
  );

  for (genvar i = 0; i < 2; i++) begin : g_tcp_ram
    fnet_pkt_buf u_tcp_ram (
      .clk, .rst,
      .wr_en(prep_wr.en && (prep_sel == 1'(i))), .wr_addr(prep_wr.addr), .wr_data(prep_wr.data),
      .commit(prep_commit[i]), .commit_len(prep_len), .resend(1'b0),
      .rd_addr(out_rd_addr), .rd_data(src_data[2 + i]), .ready(prep_ready[i]), .len(src_len[2 + i]),
      .release_buf(src_release[2 + i])
    );
  end

  // ---------------------------------------------------------------- output
  assign src_ready  = {prep_ready, rr_ready, resp_ready};
  assign src_len[0] = resp_len;
  assign src_len[1] = rr_len;

  fnet_out_fsm #(.NSRC(4)) u_out (
    .clk, .rst, .rd_addr(out_rd_addr), .rd_data(src_data), .src_ready, .src_len,
    .src_release, .out_word, .out_ena, .out_payload, .out_taken, .ev_tx
  );
endmodule
