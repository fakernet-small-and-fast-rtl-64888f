// fnet_pkt_buf: packet RAM together with its control block.
//
// Each packet memory between two Fakernet state machines carries a small
// control block saying whether it holds a complete packet for the reader and
// how many 16-bit words it is long. The writer fills the RAM at will while
// 'ready' is low and then pulses 'commit' with the length; 'ready' then stays
// high until the reader pulses 'release' after consuming the packet. 'resend'
// sets 'ready' again with the previous length, without new data: the register
// result memory uses it to transmit a previous response once more.
// Commits while 'ready' is high are ignored (the packet is dropped), which is
// how the design loses packets when a resource is busy. Read latency is one
// clock, as in fnet_dpram.
module fnet_pkt_buf
  import fnet_pkg::*;
#(
  parameter int AW = PKT_AW
) (
  input  logic          clk,
  input  logic          rst,
  // writer side
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [15:0]   wr_data,
  input  logic          commit,
  input  logic [AW:0]   commit_len,
  input  logic          resend,
  // reader side
  input  logic [AW-1:0] rd_addr,
  output logic [15:0]   rd_data,
  output logic          ready,
  output logic [AW:0]   len,
  input  logic          release_buf
);
  fnet_dpram #(.AW(AW), .DW(16)) u_ram (
    .clk, .wr_en(wr_en && !ready), .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      ready <= 1'b0;
      len   <= '0;
    end else begin
      if (release_buf) ready <= 1'b0;
      if (!ready && commit) begin
        ready <= 1'b1;
        len   <= commit_len;
      end else if (!ready && resend && len != 0) begin
        ready <= 1'b1;
      end
    end
  end

  // The reader only releases a packet it has been offered.
  a_release_ready: assert property (@(posedge clk) disable iff (rst) release_buf |-> ready);
endmodule
