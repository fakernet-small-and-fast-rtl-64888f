// fnet_fill_control: user data interface into the circular TCP data buffer.
//
// The user builds a commit group by writing 32-bit words at an offset from the
// current commit point (avail), in any order and as often as it likes, and
// then commits a length; committed words become available to TCP and can no
// longer be changed. A write and a commit may come in the same cycle (the
// write belongs to the group being committed). Commit group boundaries are
// not kept. The buffer holds DEPTH = 2**BUF_AW words; the region from the
// acknowledged point (base) up to avail is not writable.
// data_free tells the user that at least one more group fits: it is dropped
// as soon as less than 3*MAX_COMMIT words are free, while a write or commit
// only counts as overflow when less than MAX_COMMIT words are free. This
// margin lets a group that was started while data_free was high complete,
// and covers the few cycles before the user sees data_free fall. After an
// overflow, nothing more is written or committed until the TCP state is
// reset (tcp_reset, which also empties the buffer).
// All user inputs pass two register stages before they act, and data_free
// passes two stages on the way out, so the user circuit is not tightly
// coupled in timing to Fakernet. avail is reported in octets.
// The behaviour above is the paper's; MAX_COMMIT (the data_offset range) is
// this design's choice, and so is reporting tcp_reset_out as a one-cycle
// pulse.
//
// base and avail are octet offsets of whole 32-bit words, so base's two
// low bits are not read and avail's two low bits are always zero.
module fnet_fill_control #(
  parameter int BUF_AW      = 10,
  parameter int OFFSET_BITS = 7
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 tcp_reset,
  // user side
  input  logic [31:0]          data_word,
  input  logic [OFFSET_BITS-1:0] data_offset,
  input  logic                 data_write,
  input  logic [OFFSET_BITS:0] data_commit_len,
  input  logic                 data_commit,
  output logic                 data_free,
  output logic                 tcp_reset_out,
  // data buffer RAM write port
  output logic                 buf_wr_en,
  output logic [BUF_AW-1:0]    buf_wr_addr,
  output logic [31:0]          buf_wr_data,
  // TCP state
  input  logic [31:0]          base,
  output logic [31:0]          avail,
  output logic                 overflow
);
  localparam int MAX_COMMIT = 2**OFFSET_BITS;
  localparam int DEPTH      = 2**BUF_AW;

  typedef struct packed {
    logic [31:0]            word;
    logic [OFFSET_BITS-1:0] offset;
    logic                   write;
    logic [OFFSET_BITS:0]   commit_len;
    logic                   commit;
  } user_in_t;

  user_in_t    in_q1, in_q2;
  logic [29:0] avail_w;
  logic [31:0] used_w, free_w;
  logic        free_q1, rst_q1, rst_q2;

  assign avail  = {avail_w, 2'b00};
  assign used_w = {2'b00, avail_w} - {2'b00, base[31:2]};
  assign free_w = 32'(DEPTH) - used_w;

  always_ff @(posedge clk) begin
    buf_wr_en <= 1'b0;
    in_q1 <= '{word: data_word, offset: data_offset, write: data_write,
               commit_len: data_commit_len, commit: data_commit};
    in_q2 <= in_q1;
    if ((in_q2.write || in_q2.commit) && free_w < 32'(MAX_COMMIT)) overflow <= 1'b1;
    else if (!overflow) begin
      if (in_q2.write) begin
        buf_wr_en   <= 1'b1;
        buf_wr_addr <= BUF_AW'(avail_w + 30'(in_q2.offset));
        buf_wr_data <= in_q2.word;
      end
      if (in_q2.commit) avail_w <= avail_w + 30'(in_q2.commit_len);
    end
    free_q1   <= !overflow && free_w >= 32'(3 * MAX_COMMIT) &&
                 !(in_q2.commit && free_w - 32'(in_q2.commit_len) < 32'(3 * MAX_COMMIT));
    data_free <= free_q1;
    rst_q1        <= tcp_reset;
    rst_q2        <= rst_q1;
    tcp_reset_out <= rst_q2;
    if (rst || tcp_reset) begin
      avail_w   <= '0;
      overflow  <= 1'b0;
      in_q1     <= '0;
      in_q2     <= '0;
      free_q1   <= 1'b0;
      data_free <= 1'b0;
      buf_wr_en <= 1'b0;
    end
    if (rst) begin
      rst_q1        <= 1'b0;
      rst_q2        <= 1'b0;
      tcp_reset_out <= 1'b0;
    end
  end
endmodule
