// tb_fnet_dpram: random writes and reads against a reference array.
// Checks that a read returns, one clock later, the last value written to
// that address, including a read of an address written in the same clock
// (which must return the old value). Ends with a TB_RESULT line.
module tb_fnet_dpram;
  localparam int AW = 10, DW = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic          wr_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [DW-1:0] wr_data = 0, rd_data;
  logic [DW-1:0] ref_mem [2**AW];
  bit            known [2**AW];
  int checks = 0, failures = 0;

  fnet_dpram #(.AW(AW), .DW(DW)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    logic [DW-1:0] expect_v;
    logic          expect_known;
    foreach (known[i]) known[i] = 0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(0, 1) == 1);
      wr_addr = AW'($urandom_range(0, 63));
      wr_data = DW'($urandom);
      rd_addr = AW'($urandom_range(0, 63));
      expect_v = ref_mem[rd_addr];
      expect_known = known[rd_addr];
      @(posedge clk);
      if (wr_en) begin ref_mem[wr_addr] = wr_data; known[wr_addr] = 1; end
      #1;
      if (expect_known) begin
        checks++;
        if (rd_data !== expect_v) begin
          failures++;
          if (failures < 10) $display("FAIL: addr %0d got %h expected %h", rd_addr, rd_data, expect_v);
        end
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
