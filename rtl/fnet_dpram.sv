// fnet_dpram: simple dual-port RAM with one writer and one reader.
//
// Data moves between the Fakernet state machines through RAM blocks that each
// have exactly one writing and one reading side. This is the plain memory
// used for the TCP template RAM and the circular data buffer. The write is
// synchronous; the read is registered, so rd_data shows the word at rd_addr
// one clock after rd_addr is presented (a block-RAM read). Contents are not
// reset: every reader only reads what a writer has written before.
module fnet_dpram #(
  parameter int AW = 10,
  parameter int DW = 16
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
