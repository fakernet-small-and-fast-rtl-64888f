// fnet_debug_counters: event counters kept in a RAM block.
//
// Instead of one adder per counter, the 32-bit counter values live in a small
// RAM. Each event input only sets a pending flag. An update process runs in a
// fixed four-cycle rhythm: in its first cycle it picks the lowest pending flag
// and reads that counter, in the second it writes the counter plus one and
// clears the flag, and in the third it reads a counter for the register
// interface (rd_req/rd_addr), answered with rd_valid/rd_data in the fourth.
// Counting is exact as long as each event source fires less often than the
// update process can serve it; an event arriving while its flag is still set
// is merged. Counters start at zero after reset: a clearing pass writes every
// entry once (2**AW cycles) before counting begins.
// The RAM storage, the single-bit flags and the four-cycle update follow the
// paper; which flag is served first (lowest index) and the read-out slot are
// this design's choice.
module fnet_debug_counters #(
  parameter int N  = 8,
  parameter int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [N-1:0]  events,
  input  logic          rd_req,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output logic [31:0]   rd_data
);
  logic [N-1:0]  pending;
  logic [1:0]    phase;
  logic [AW-1:0] sel, clr_idx;
  logic          sel_valid, clearing, rd_pend, rd_slot;
  logic [AW-1:0] rd_a;
  logic          wr_en;
  logic [AW-1:0] wr_addr, ram_rd_addr;
  logic [31:0]   wr_data, ram_rd_data;
  logic [N-1:0]  clr_mask;

  fnet_dpram #(.AW(AW), .DW(32)) u_ram (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(ram_rd_addr), .rd_data(ram_rd_data)
  );

  // lowest pending flag
  logic [AW-1:0] low_idx;
  logic          low_any;
  always_comb begin
    low_idx = '0;
    low_any = 1'b0;
    for (int i = N - 1; i >= 0; i--)
      if (pending[i]) begin
        low_idx = AW'(i);
        low_any = 1'b1;
      end
  end

  always_comb begin
    ram_rd_addr = (phase == 2'd2) ? rd_a : low_idx;
    wr_en       = clearing || (phase == 2'd1 && sel_valid);
    wr_addr     = clearing ? clr_idx : sel;
    wr_data     = clearing ? 32'd0 : ram_rd_data + 32'd1;
    clr_mask    = '0;
    if (!clearing && phase == 2'd1 && sel_valid) clr_mask[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pending  <= '0;
      phase    <= 2'd0;
      clearing <= 1'b1;
      clr_idx  <= '0;
      sel_valid <= 1'b0;
      rd_pend  <= 1'b0;
      rd_slot  <= 1'b0;
      rd_valid <= 1'b0;
      sel      <= '0;
      rd_a     <= '0;
    end else begin
      pending  <= (pending & ~clr_mask) | events;
      phase    <= phase + 2'd1;
      rd_valid <= 1'b0;
      if (rd_req) begin
        rd_pend <= 1'b1;
        rd_a    <= rd_addr;
      end
      if (clearing) begin
        clr_idx <= clr_idx + 1'b1;
        if (clr_idx == AW'(N - 1)) clearing <= 1'b0;
      end
      unique case (phase)
        2'd0: begin
          sel       <= low_idx;
          sel_valid <= low_any && !clearing;
        end
        2'd2: begin
          rd_slot <= rd_pend;
          if (!rd_req) rd_pend <= 1'b0;
        end
        2'd3: if (rd_slot) begin
          rd_valid <= 1'b1;
          rd_data  <= ram_rd_data;
        end
        default: ;
      endcase
    end
  end
endmodule
