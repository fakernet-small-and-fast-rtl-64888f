// fnet_tcp_prep: TCP packet preparation state machine.
//
// A TCP packet's checksum depends on its payload but sits before it, so each
// packet is first built in a memory and only then sent. This FSM takes a
// request from the TCP control (start offset, payload length, flags) when the
// next of its two packet RAMs is free, and fills that RAM in one pass:
//   - the 27 header words are read from the template RAM (the PC's SYN, with
//     addresses and ports already swapped and the acknowledgement set), with
//     the IP total length, sequence number, flags, window and urgent pointer
//     replaced;
//   - the payload is read from the circular data buffer, 32-bit word by word,
//     and written as two 16-bit words (one RAM word per clock);
//   - packets shorter than the 60-octet Ethernet minimum get zero padding;
//   - the IP header and TCP checksums, summed on the way, are written last.
// The RAM is then committed; the two RAMs are used alternately (ping-pong),
// so one packet can be prepared while the other is being transmitted.
// The template, the two memories and the two-pass checksum are the paper's;
// the advertised window (OUR_WINDOW) is this design's choice, since no data
// is ever received.
//
// Of the latched request only the length and flags are read again; the
// start offset is used when the request is taken and the retransmission
// flag does not change how a packet is built.
module fnet_tcp_prep
  import fnet_pkg::*;
#(
  parameter logic [31:0] TCP_ISN    = 32'h0000_0000,
  parameter int          BUF_AW     = 10,
  parameter logic [15:0] OUR_WINDOW = 16'h1000
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              req_valid,
  input  tcp_req_t          req,
  output logic              req_take,
  // template RAM
  output logic [4:0]        tpl_rd_addr,
  input  logic [15:0]       tpl_rd_data,
  // data buffer
  output logic [BUF_AW-1:0] buf_rd_addr,
  input  logic [31:0]       buf_rd_data,
  // the two packet RAMs (shared write port, separate commits)
  output pkt_wr_t           prep_wr,
  output logic [1:0]        prep_commit,
  output logic [PKT_AW:0]   prep_len,
  output logic              prep_sel,
  input  logic [1:0]        prep_ready,
  output logic              busy
);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_DATA, S_PAD, S_IPSUM, S_TCPSUM, S_COMMIT} state_e;

  state_e          state;
  tcp_req_t        r;
  logic            sel;
  logic [5:0]      ridx, didx;
  logic            dv;
  logic [PKT_AW:0] widx;
  logic [15:0]     ip_sum, tcp_sum;
  logic [31:0]     seq;
  logic [13:0]     words_left;   // 32-bit payload words still to read
  logic            half;         // 0: write high half, 1: low half
  logic [15:0]     lo_hold;
  logic [BUF_AW-1:0] baddr;

  assign tpl_rd_addr = ridx[4:0];
  assign buf_rd_addr = baddr;
  assign prep_sel    = sel;
  assign busy        = (state != S_IDLE);
  // a request is taken in the same cycle it is seen, so the TCP control
  // updates its pointers with exactly the request that was latched
  assign req_take    = (state == S_IDLE) && req_valid && !prep_ready[sel];

  always_ff @(posedge clk) begin
    logic [15:0] v;
    prep_wr.en  <= 1'b0;
    prep_commit <= 2'b00;

    unique case (state)
      S_IDLE: begin
        ridx <= '0;
        dv   <= 1'b0;
        if (req_take) begin
          r          <= req;
          seq        <= req.flags[1] ? TCP_ISN : TCP_ISN + 32'd1 + req.start;
          ip_sum     <= 16'h0000;
          // pseudo header: protocol and TCP length (addresses are added below)
          tcp_sum    <= oc_add(16'd6, 16'd20 + req.len);
          words_left <= req.len[15:2];
          baddr      <= BUF_AW'(req.start[31:2]);
          half       <= 1'b0;
          state      <= S_HDR;
        end
      end

      S_HDR: begin
        if (ridx < 6'(TCP_HDR_END)) begin
          ridx <= ridx + 1'b1;
          didx <= ridx;
          dv   <= 1'b1;
        end else dv <= 1'b0;
        if (dv) begin
          v = tpl_rd_data;
          unique case (int'(didx))
            W_IP_LEN:    v = 16'd40 + r.len;
            W_IP_CSUM:   v = 16'h0000;
            W_TCP_SEQ:   v = seq[31:16];
            W_TCP_SEQ+1: v = seq[15:0];
            W_TCP_FLAGS: v = {4'd5, 4'd0, r.flags};
            W_TCP_WIN:   v = OUR_WINDOW;
            W_TCP_CSUM:  v = 16'h0000;
            W_TCP_URG:   v = 16'h0000;
            default: ;
          endcase
          if (didx >= 6'(W_IP_VER) && didx < 6'(W_L4)) ip_sum <= oc_add(ip_sum, v);
          if (didx >= 6'(W_IP_SRC) && didx < 6'(W_L4)) tcp_sum <= oc_add(tcp_sum, v);
          if (didx >= 6'(W_L4)) tcp_sum <= oc_add(tcp_sum, v);
          prep_wr.en   <= 1'b1;
          prep_wr.addr <= PKT_AW'(didx);
          prep_wr.data <= v;
          if (didx == 6'(TCP_HDR_END - 1)) begin
            widx  <= (PKT_AW+1)'(TCP_HDR_END);
            state <= (words_left != 0) ? S_DATA : S_PAD;
          end
        end
      end

      S_DATA: begin
        // buf_rd_data holds the word at baddr from the previous clock on
        if (!half) begin
          v       = buf_rd_data[31:16];
          lo_hold <= buf_rd_data[15:0];
          baddr   <= baddr + 1'b1;
        end else begin
          v = lo_hold;
        end
        half <= !half;
        prep_wr.en   <= 1'b1;
        prep_wr.addr <= widx[PKT_AW-1:0];
        prep_wr.data <= v;
        tcp_sum      <= oc_add(tcp_sum, v);
        widx         <= widx + 1'b1;
        if (half) begin
          words_left <= words_left - 1'b1;
          if (words_left == 14'd1) state <= S_PAD;
        end
      end

      S_PAD: begin
        if (widx < (PKT_AW+1)'(MIN_WORDS)) begin
          prep_wr.en   <= 1'b1;
          prep_wr.addr <= widx[PKT_AW-1:0];
          prep_wr.data <= 16'h0000;
          widx         <= widx + 1'b1;
        end else begin
          prep_len <= widx;
          state    <= S_IPSUM;
        end
      end

      S_IPSUM: begin
        prep_wr.en   <= 1'b1;
        prep_wr.addr <= PKT_AW'(W_IP_CSUM);
        prep_wr.data <= ~ip_sum;
        state        <= S_TCPSUM;
      end

      S_TCPSUM: begin
        prep_wr.en   <= 1'b1;
        prep_wr.addr <= PKT_AW'(W_TCP_CSUM);
        prep_wr.data <= (tcp_sum == 16'hFFFF) ? 16'hFFFF : ~tcp_sum;
        state        <= S_COMMIT;
      end

      S_COMMIT: begin
        prep_commit[sel] <= 1'b1;
        sel              <= !sel;
        state            <= S_IDLE;
      end

      default: state <= S_IDLE;
    endcase

    if (rst) begin
      state       <= S_IDLE;
      sel         <= 1'b0;
      prep_wr.en  <= 1'b0;
      prep_commit <= 2'b00;
      prep_len    <= '0;
    end
  end
endmodule
