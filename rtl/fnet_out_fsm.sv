// fnet_out_fsm: output packet state machine.
//
// When idle, the FSM looks for a packet marked ready in one of its source
// memories, in fixed priority: the ARP/ICMP/UDP response RAM, then the
// register result RAM, and only then the two TCP packet RAMs (taken
// alternately, in the order the TCP prepare FSM filled them), so that TCP data
// never starves control traffic. It then sends the Ethernet preamble (seven
// 0x55 octets and the start-of-frame delimiter), the packet words, the frame
// check sequence computed on the fly, and an inter-packet gap of 12 octets,
// before looking for the next packet. The source memory is released as soon
// as its last word has been sent.
// Interface: out_word is valid whenever out_ena is high (preamble and frame)
// and is held until out_taken; out_payload marks the frame words (destination
// MAC up to and including the FCS). During the gap out_ena is low and each
// out_taken counts one gap word. Sources share one read address; their read
// data arrive one clock after the address, so the address is advanced in the
// same cycle as out_taken to give one word per clock.
// The priority order, preamble, FCS and gap follow the paper. The SFD octet
// is 0xD5 (sent as 0x55D5 in the last preamble word); the paper writes it as
// 0x5d, the same octet with its nibbles in transmission order.
module fnet_out_fsm
  import fnet_pkg::*;
#(
  parameter int NSRC = 4
) (
  input  logic              clk,
  input  logic              rst,
  output logic [PKT_AW-1:0] rd_addr,
  input  logic [15:0]       rd_data [NSRC],
  input  logic [NSRC-1:0]   src_ready,
  input  logic [PKT_AW:0]   src_len [NSRC],
  output logic [NSRC-1:0]   src_release,
  output logic [15:0]       out_word,
  output logic              out_ena,
  output logic              out_payload,
  input  logic              out_taken,
  output logic              ev_tx
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_PAY, S_FCS, S_GAP} state_e;

  state_e          state;
  logic [$clog2(NSRC)-1:0] sel;
  logic            tcp_next;
  logic [PKT_AW:0] idx, len;
  logic [2:0]      cnt;
  logic [31:0]     crc;

  assign rd_addr = (state == S_PAY && out_taken) ? PKT_AW'(idx + 1'b1) : idx[PKT_AW-1:0];

  always_comb begin
    out_word    = 16'h0000;
    out_ena     = 1'b0;
    out_payload = 1'b0;
    unique case (state)
      S_PRE: begin
        out_ena  = 1'b1;
        out_word = (cnt == 3'd3) ? 16'h55D5 : 16'h5555;
      end
      S_PAY: begin
        out_ena     = 1'b1;
        out_payload = 1'b1;
        out_word    = rd_data[sel];
      end
      S_FCS: begin
        out_ena     = 1'b1;
        out_payload = 1'b1;
        out_word    = (cnt == 3'd0) ? ~{crc[7:0], crc[15:8]} : ~{crc[23:16], crc[31:24]};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    src_release <= '0;
    ev_tx       <= 1'b0;
    unique case (state)
      S_IDLE: begin
        idx <= '0;
        cnt <= '0;
        if (src_ready[0]) begin
          sel <= 0; len <= src_len[0]; state <= S_PRE;
        end else if (src_ready[1]) begin
          sel <= 1; len <= src_len[1]; state <= S_PRE;
        end else if (src_ready[2 + int'(tcp_next)]) begin
          sel      <= 2 + tcp_next;
          len      <= src_len[2 + int'(tcp_next)];
          tcp_next <= !tcp_next;
          state    <= S_PRE;
        end
      end
      S_PRE: if (out_taken) begin
        cnt <= cnt + 3'd1;
        if (cnt == 3'd3) begin
          state <= S_PAY;
          crc   <= CRC_INIT;
        end
      end
      S_PAY: if (out_taken) begin
        crc <= crc32_word(crc, out_word);
        idx <= idx + 1'b1;
        if (idx + 1'b1 == len) begin
          state            <= S_FCS;
          cnt              <= '0;
          src_release[sel] <= 1'b1;
        end
      end
      S_FCS: if (out_taken) begin
        cnt <= cnt + 3'd1;
        if (cnt == 3'd1) begin
          state <= S_GAP;
          cnt   <= '0;
          ev_tx <= 1'b1;
        end
      end
      S_GAP: if (out_taken) begin
        cnt <= cnt + 3'd1;
        if (cnt == 3'd5) state <= S_IDLE;
      end
      default: state <= S_IDLE;
    endcase
    if (rst) begin
      state       <= S_IDLE;
      tcp_next    <= 1'b0;
      sel         <= '0;
      src_release <= '0;
      ev_tx       <= 1'b0;
    end
  end
endmodule
