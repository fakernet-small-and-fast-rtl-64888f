// tb_fnet_rtt_filter: feeds random sample sets of sixteen and compares the
// filter output (minimum over four groups of the maximum within each group
// of four) with a reference computed here. Also checks that no result is
// given before the sixteenth sample and that reset restarts the count.
module tb_fnet_rtt_filter;
  localparam int W = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic         in_valid = 0, out_valid;
  logic [W-1:0] in_sample = 0, out_value;
  int checks = 0, failures = 0;
  int outs = 0;

  fnet_rtt_filter #(.W(W)) dut (.clk, .rst, .in_valid, .in_sample, .out_valid, .out_value);

  always @(posedge clk) if (out_valid) outs++;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    logic [W-1:0] s [16];
    logic [W-1:0] gm, best;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int set = 0; set < 200; set++) begin
      for (int i = 0; i < 16; i++) s[i] = W'($urandom_range(0, (set % 3 == 0) ? 20 : 65535));
      best = '1;
      for (int g = 0; g < 4; g++) begin
        gm = 0;
        for (int i = 0; i < 4; i++) if (s[4*g+i] > gm) gm = s[4*g+i];
        if (gm < best) best = gm;
      end
      outs = 0;
      for (int i = 0; i < 16; i++) begin
        @(posedge clk);
        in_valid  <= 1;
        in_sample <= s[i];
        repeat ($urandom_range(0, 1)) begin
          @(posedge clk);
          in_valid <= 0;
        end
      end
      @(posedge clk);
      in_valid <= 0;
      @(posedge clk);
      #1;
      chk(outs == 1, "one result per sixteen samples");
      chk(out_value == best, $sformatf("result %0d expected %0d", out_value, best));
      if (set == 100) begin
        // a partial set, then reset: the next full set must stand alone
        for (int i = 0; i < 7; i++) begin @(posedge clk); in_valid <= 1; in_sample <= 0; end
        @(posedge clk); in_valid <= 0; rst <= 1;
        @(posedge clk); rst <= 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
