// fnet_datagen: built-in test data generator for the TCP stream.
//
// When enabled through an internal register, this unit acts as a data
// producer on the TCP data interface: whenever data_free is high it writes a
// commit group of group_len 32-bit words, holding consecutive values of a
// running 32-bit counter (so the receiver can check the stream for gaps),
// one word per clock at offsets 0..group_len-1, and commits the group with
// the last write. It then waits COOLDOWN clocks, long enough for data_free to
// reflect the commit through the interface registers, before the next group.
// The paper only says that such a generator exists and is steered through
// the register interface; the counter pattern and the grouping are this
// design's choices.
module fnet_datagen #(
  parameter int OFFSET_BITS = 7,
  parameter int COOLDOWN    = 8
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   enable,
  input  logic [7:0]             group_len,
  input  logic                   data_free,
  output logic [31:0]            data_word,
  output logic [OFFSET_BITS-1:0] data_offset,
  output logic                   data_write,
  output logic [OFFSET_BITS:0]   data_commit_len,
  output logic                   data_commit
);
  localparam int MAXG = 2**OFFSET_BITS;

  logic [31:0]          counter;
  logic [OFFSET_BITS:0] pos, glen;
  logic                 active;
  logic [4:0]           wait_cnt;

  always_ff @(posedge clk) begin
    data_write  <= 1'b0;
    data_commit <= 1'b0;
    if (wait_cnt != 0) wait_cnt <= wait_cnt - 5'd1;
    if (!active) begin
      if (enable && data_free && wait_cnt == 0 && group_len != 8'd0) begin
        active <= 1'b1;
        pos    <= '0;
        glen   <= (32'(group_len) > MAXG) ? (OFFSET_BITS+1)'(MAXG) : (OFFSET_BITS+1)'(group_len);
      end
    end else begin
      data_write  <= 1'b1;
      data_offset <= pos[OFFSET_BITS-1:0];
      data_word   <= counter + 32'(pos);
      pos         <= pos + 1'b1;
      if (pos + 1'b1 == glen) begin
        data_commit     <= 1'b1;
        data_commit_len <= glen;
        counter         <= counter + 32'(glen);
        active          <= 1'b0;
        wait_cnt        <= 5'(COOLDOWN);
      end
    end
    if (rst || !enable) begin
      active      <= 1'b0;
      data_write  <= 1'b0;
      data_commit <= 1'b0;
      wait_cnt    <= '0;
    end
    if (rst) begin
      counter         <= 32'd0;
      data_word       <= 32'd0;
      data_offset     <= '0;
      data_commit_len <= '0;
      pos             <= '0;
      glen            <= '0;
    end
  end
endmodule
