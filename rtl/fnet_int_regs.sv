// fnet_int_regs: Fakernet internal registers on the register access path.
//
// Accesses whose address has bit 27 set arrive here instead of at the user
// circuit. The registers give the state of Fakernet itself and the knobs used
// for testing: a status word (TCP state, buffer overflow, active UDP
// channels), a write-only TCP reset (the only way to make a new TCP
// connection possible), the maximum TCP payload per packet (default 1440
// octets) and an artificial limit on the receive window, the data generator
// control, the current RTT estimate, and read-out of the debug counters.
// Address map (reg_addr low bits):
//   0x000 R  status  [1:0] TCP state, [2] data buffer overflow, [15:8] UDP channels in use
//   0x001 W  any write resets the TCP connection and clears the data buffer
//   0x002 RW maximum TCP payload octets
//   0x003 RW receive window limit octets
//   0x004 RW data generator: [0] enable, [15:8] words per commit group
//   0x005 R  RTT estimate (slow_clock_tick units)
//   0x100+i R debug counter i
// Writes complete the next cycle (int_done); counter reads wait for the
// counter RAM's read slot. The existence of a TCP reset register, the payload
// and window limits and the generator control are from the paper; the
// address map and bit fields are this design's own.
//
// Address bits above 8 are not decoded (the map repeats) and the writable
// registers are 16 bits wide, so the upper write-data half is not read.
module fnet_int_regs
  import fnet_pkg::*;
#(
  parameter int NUM_UDP_CH  = 2,
  parameter int CNT_AW      = 3,
  parameter logic [15:0] MAX_PAYLOAD = 16'd1440
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [REG_AW-1:0] int_addr,
  input  logic [31:0]       int_data_wr,
  input  logic              int_write,
  input  logic              int_read,
  output logic [31:0]       int_data_rd,
  output logic              int_done,
  // state shown
  input  logic [NUM_UDP_CH-1:0] udp_ch_active,
  input  tcp_state_e        tcp_state,
  input  logic              overflow,
  input  logic [15:0]       rtt_est,
  // controls
  output logic              tcp_reset_req,
  output logic [15:0]       cfg_max_payload,
  output logic [15:0]       cfg_win_limit,
  output logic              gen_enable,
  output logic [7:0]        gen_len,
  // debug counter read-out
  output logic              cnt_rd_req,
  output logic [CNT_AW-1:0] cnt_rd_addr,
  input  logic              cnt_rd_valid,
  input  logic [31:0]       cnt_rd_data
);
  logic cnt_wait;

  always_ff @(posedge clk) begin
    tcp_reset_req <= 1'b0;
    int_done      <= 1'b0;
    cnt_rd_req    <= 1'b0;
    if (int_write) begin
      int_done <= 1'b1;
      unique case (int_addr[8:0])
        9'h001: tcp_reset_req <= 1'b1;
        9'h002: cfg_max_payload <= int_data_wr[15:0];
        9'h003: cfg_win_limit   <= int_data_wr[15:0];
        9'h004: begin
          gen_enable <= int_data_wr[0];
          gen_len    <= int_data_wr[15:8];
        end
        default: int_done <= 1'b0;
      endcase
    end
    if (int_read) begin
      int_done    <= 1'b1;
      int_data_rd <= 32'd0;
      if (int_addr[8]) begin
        int_done    <= 1'b0;
        cnt_rd_req  <= 1'b1;
        cnt_rd_addr <= int_addr[CNT_AW-1:0];
        cnt_wait    <= 1'b1;
      end else begin
        unique case (int_addr[7:0])
          8'h00: begin
            int_data_rd[1:0] <= tcp_state;
            int_data_rd[2]   <= overflow;
            for (int c = 0; c < NUM_UDP_CH && c < 8; c++) int_data_rd[8 + c] <= udp_ch_active[c];
          end
          8'h02: int_data_rd[15:0] <= cfg_max_payload;
          8'h03: int_data_rd[15:0] <= cfg_win_limit;
          8'h04: int_data_rd[15:0] <= {gen_len, 7'd0, gen_enable};
          8'h05: int_data_rd[15:0] <= rtt_est;
          default: int_done <= 1'b0;
        endcase
      end
    end
    if (cnt_wait && cnt_rd_valid) begin
      cnt_wait    <= 1'b0;
      int_done    <= 1'b1;
      int_data_rd <= cnt_rd_data;
    end
    if (rst) begin
      cfg_max_payload <= MAX_PAYLOAD;
      cfg_win_limit   <= 16'hFFFF;
      gen_enable      <= 1'b0;
      gen_len         <= 8'd16;
      cnt_wait        <= 1'b0;
      cnt_rd_addr     <= '0;
      int_data_rd     <= 32'd0;
      tcp_reset_req   <= 1'b0;
      int_done        <= 1'b0;
      cnt_rd_req      <= 1'b0;
    end
  end
endmodule
