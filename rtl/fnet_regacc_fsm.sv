// fnet_regacc_fsm: UDP register access state machine.
//
// Second stage of a UDP register access. The input FSM has already written a
// validated request, with swapped addresses and ports and fresh status words,
// into the register access RAM. This FSM copies it word by word into the
// register result RAM, performing each access on the way: every access is
// four 16-bit words, a 32-bit address (bit 31 read, bit 30 write, bit 27
// selects the Fakernet internal registers, bits 24:0 the address) and 32-bit
// data. For each, a one-cycle reg_read or reg_write pulse is issued with the
// address and write data held; if reg_done arrives within REG_TIMEOUT cycles
// the access is marked done (bit 29) in the response and, for a read, the data
// is replaced by the value read. The reply word echoes the request word. The
// UDP checksum of the response is summed while the words are written and
// stored last. Then the result RAM is committed and the request RAM released.
//
// Timing: the copy streams one word per clock; each access adds the wait for
// reg_done (registered once here) and four write cycles. The address+data
// format, the timeout on reg_done and the success marking follow the paper;
// the bit positions of read, write and done in the top four bits are this
// design's choice, and so is echoing the request as the reply.
//
// Of the word counter inside an access group only the two low bits
// (which of the four words) are read.
module fnet_regacc_fsm
  import fnet_pkg::*;
#(
  parameter int REG_TIMEOUT = 10
) (
  input  logic            clk,
  input  logic            rst,
  // register access RAM (read side)
  output logic [PKT_AW-1:0] ra_rd_addr,
  input  logic [15:0]     ra_rd_data,
  input  logic            ra_ready,
  input  logic [PKT_AW:0] ra_len,
  output logic            ra_release,
  // register result RAM (write side)
  output pkt_wr_t         rr_wr,
  output logic            rr_commit,
  output logic [PKT_AW:0] rr_len,
  input  logic            rr_ready,
  output logic            busy,
  // user register interface
  output logic [REG_AW-1:0] reg_addr,
  output logic [31:0]     reg_data_wr,
  input  logic [31:0]     reg_data_rd,
  output logic            reg_write,
  output logic            reg_read,
  input  logic            reg_done,
  // internal register interface
  output logic            int_write,
  output logic            int_read,
  input  logic [31:0]     int_data_rd,
  input  logic            int_done
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_ACCESS, S_PUT, S_CSUM, S_DONE} state_e;

  state_e          state;
  logic [PKT_AW:0] ridx, didx, len, l4_end;
  logic            dv;
  logic [15:0]     sum, req_word;
  logic [15:0]     acc [4];
  logic [1:0]      k;
  logic [4:0]      timer;
  logic            done_q, is_int;
  logic [31:0]     rd_q;
  logic            acc_ok;

  assign ra_rd_addr = ridx[PKT_AW-1:0];
  assign busy       = (state != S_IDLE);
  assign rr_len     = len;

  // sum only the UDP part and the pseudo header
  function automatic logic [15:0] add_word(input logic [15:0] s, input logic [PKT_AW:0] i,
                                           input logic [15:0] v, input logic [PKT_AW:0] le);
    if (i >= (PKT_AW+1)'(W_IP_SRC) && i < (PKT_AW+1)'(W_L4)) return oc_add(s, v);
    if (i == (PKT_AW+1)'(W_UDP_LEN)) return oc_add(oc_add(s, v), oc_add(v, 16'h0011));
    if (i >= (PKT_AW+1)'(W_L4) && i < le && i != (PKT_AW+1)'(W_UDP_CSUM)) return oc_add(s, v);
    return s;
  endfunction

  always_ff @(posedge clk) begin
    logic [15:0] v;
    logic [PKT_AW:0] gi;
    rr_wr.en   <= 1'b0;
    rr_commit  <= 1'b0;
    ra_release <= 1'b0;
    reg_write  <= 1'b0;
    reg_read   <= 1'b0;
    int_write  <= 1'b0;
    int_read   <= 1'b0;
    done_q     <= reg_done;

    unique case (state)
      S_IDLE: begin
        dv   <= 1'b0;
        ridx <= '0;
        sum  <= 16'h0000;
        // the release and commit of the previous request take effect a cycle later
        if (ra_ready && !rr_ready && !ra_release && !rr_commit) begin
          state  <= S_RUN;
          len    <= ra_len;
          l4_end <= ra_len;
        end
      end

      S_RUN: begin
        if (ridx < len) begin
          ridx <= ridx + 1'b1;
          didx <= ridx;
          dv   <= 1'b1;
        end else dv <= 1'b0;
        if (dv) begin
          v = ra_rd_data;
          if (didx == (PKT_AW+1)'(W_IP_LEN)) l4_end <= (PKT_AW+1)'(W_IP_VER) + (PKT_AW+1)'(v[15:1]);
          if (didx == (PKT_AW+1)'(W_RA_REQ)) req_word <= v;
          if (didx == (PKT_AW+1)'(W_RA_REPLY)) v = req_word;
          if (didx >= (PKT_AW+1)'(W_RA_DATA) && didx < l4_end) begin
            gi = didx - (PKT_AW+1)'(W_RA_DATA);
            acc[gi[1:0]] <= v;
            if (gi[1:0] == 2'd3) begin
              // all four words of an access gathered: perform it
              logic [31:0] a;
              a = {acc[0], acc[1]};
              state     <= S_ACCESS;
              dv        <= 1'b0;
              ridx      <= didx + 1'b1;
              timer     <= '0;
              acc_ok    <= 1'b0;
              is_int    <= a[RA_BIT_INTERNAL];
              reg_addr  <= a[REG_AW-1:0];
              reg_data_wr <= {acc[2], v};
              if (a[RA_BIT_INTERNAL]) begin
                int_read  <= a[RA_BIT_READ];
                int_write <= a[RA_BIT_WRITE] && !a[RA_BIT_READ];
              end else begin
                reg_read  <= a[RA_BIT_READ];
                reg_write <= a[RA_BIT_WRITE] && !a[RA_BIT_READ];
              end
              if (!a[RA_BIT_READ] && !a[RA_BIT_WRITE]) timer <= 5'(REG_TIMEOUT);
            end
          end else begin
            rr_wr.en   <= 1'b1;
            rr_wr.addr <= didx[PKT_AW-1:0];
            rr_wr.data <= v;
            sum <= add_word(sum, didx, v, l4_end);
          end
        end else if (ridx >= len) begin
          state <= S_CSUM;
        end
      end

      S_ACCESS: begin
        timer <= timer + 5'd1;
        if ((is_int ? int_done : done_q) && timer <= 5'(REG_TIMEOUT)) begin
          acc_ok <= 1'b1;
          rd_q   <= is_int ? int_data_rd : reg_data_rd;
          state  <= S_PUT;
          k      <= 2'd0;
        end else if (timer >= 5'(REG_TIMEOUT)) begin
          state <= S_PUT;
          k     <= 2'd0;
        end
      end

      S_PUT: begin
        logic [PKT_AW:0] wi;
        wi = ridx - (PKT_AW+1)'(4) + (PKT_AW+1)'(k);
        unique case (k)
          2'd0: v = acc[0] | (acc_ok ? 16'(1 << (RA_BIT_DONE - 16)) : 16'h0000);
          2'd1: v = acc[1];
          2'd2: v = (acc_ok && acc[0][RA_BIT_READ - 16]) ? rd_q[31:16] : acc[2];
          default: v = (acc_ok && acc[0][RA_BIT_READ - 16]) ? rd_q[15:0] : reg_data_wr[15:0];
        endcase
        rr_wr.en   <= 1'b1;
        rr_wr.addr <= wi[PKT_AW-1:0];
        rr_wr.data <= v;
        sum <= add_word(sum, wi, v, l4_end);
        k   <= k + 2'd1;
        if (k == 2'd3) state <= S_RUN;
      end

      S_CSUM: begin
        rr_wr.en   <= 1'b1;
        rr_wr.addr <= PKT_AW'(W_UDP_CSUM);
        rr_wr.data <= (sum == 16'hFFFF) ? 16'hFFFF : ~sum;
        state      <= S_DONE;
      end

      S_DONE: begin
        rr_commit  <= 1'b1;
        ra_release <= 1'b1;
        state      <= S_IDLE;
      end

      default: state <= S_IDLE;
    endcase

    if (rst) begin
      state      <= S_IDLE;
      rr_wr.en   <= 1'b0;
      rr_commit  <= 1'b0;
      ra_release <= 1'b0;
      reg_write  <= 1'b0;
      reg_read   <= 1'b0;
      int_write  <= 1'b0;
      int_read   <= 1'b0;
      reg_addr   <= '0;
      reg_data_wr <= '0;
    end
  end

  // read and write pulses last one cycle and never overlap
  a_rw_excl: assert property (@(posedge clk) disable iff (rst) !(reg_read && reg_write));
endmodule
