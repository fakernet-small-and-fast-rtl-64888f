// fnet_rtt_filter: round-trip-time filter over 16 measurements.
//
// Single RTT samples are noisy: a delayed acknowledgement or a busy PC makes
// one sample long. The filter takes 16 samples as four groups of four, keeps
// the maximum of each group, and outputs the minimum of the four maxima. The
// result (out_valid, one cycle) appears with the 16th sample's clock and then
// a new set of 16 starts; the user keeps the last result until the next one.
// This is exactly the paper's filter; only the register-level structure is
// this design's.
module fnet_rtt_filter #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] in_sample,
  output logic         out_valid,
  output logic [W-1:0] out_value
);
  logic [3:0]   cnt;
  logic [W-1:0] gmax, gmin;

  always_ff @(posedge clk) begin
    logic [W-1:0] m, n;
    out_valid <= 1'b0;
    if (in_valid) begin
      m = (cnt[1:0] == 2'd0 || in_sample > gmax) ? in_sample : gmax;
      gmax <= m;
      if (cnt[1:0] == 2'd3) begin
        n = (cnt[3:2] == 2'd0 || m < gmin) ? m : gmin;
        gmin <= n;
        if (cnt == 4'd15) begin
          out_valid <= 1'b1;
          out_value <= n;
        end
      end
      cnt <= cnt + 4'd1;
    end
    if (rst) begin
      cnt       <= '0;
      gmax      <= '0;
      gmin      <= '0;
      out_valid <= 1'b0;
      out_value <= '0;
    end
  end
endmodule
