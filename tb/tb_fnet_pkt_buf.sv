// tb_fnet_pkt_buf: a writer fills random packets and commits them, a reader
// waits for 'ready', reads every word back (registered read, one clock
// latency), compares with what was written and releases. Also checks that
// writes and commits while the buffer holds a packet are ignored, and that
// 'resend' offers the previous packet again with its old length.
module tb_fnet_pkt_buf;
  localparam int AW = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic          wr_en = 0, commit = 0, resend = 0, release_buf = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [15:0]   wr_data = 0, rd_data;
  logic [AW:0]   commit_len = 0, len;
  logic          ready;
  int checks = 0, failures = 0;

  fnet_pkt_buf #(.AW(AW)) dut (.clk, .rst, .wr_en, .wr_addr, .wr_data, .commit, .commit_len,
    .resend, .rd_addr, .rd_data, .ready, .len, .release_buf);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  task automatic write_pkt(logic [15:0] pkt[$]);
    for (int i = 0; i < pkt.size(); i++) begin
      @(posedge clk);
      wr_en <= 1; wr_addr <= AW'(i); wr_data <= pkt[i];
    end
    @(posedge clk);
    wr_en <= 0; commit <= 1; commit_len <= (AW+1)'(pkt.size());
    @(posedge clk);
    commit <= 0;
  endtask

  task automatic read_check(logic [15:0] pkt[$], bit rel);
    int t = 0;
    while (!ready && t < 100) begin @(posedge clk); t++; end
    chk(ready, "ready after commit");
    chk(int'(len) == pkt.size(), "length");
    for (int i = 0; i < pkt.size(); i++) begin
      @(posedge clk); rd_addr <= AW'(i);
      @(posedge clk); #1;
      chk(rd_data == pkt[i], $sformatf("word %0d", i));
    end
    if (rel) begin
      @(posedge clk); release_buf <= 1;
      @(posedge clk); release_buf <= 0;
      @(posedge clk); #1;
      chk(!ready, "not ready after release");
    end
  endtask

  initial begin
    logic [15:0] p[$], q[$];
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    chk(!ready, "empty after reset");
    for (int n = 0; n < 30; n++) begin
      p = {};
      for (int i = 0; i < $urandom_range(30, 800); i++) p.push_back(16'($urandom));
      write_pkt(p);
      // a second packet while the first is held must change nothing
      q = {};
      for (int i = 0; i < 40; i++) q.push_back(16'hDEAD);
      write_pkt(q);
      read_check(p, 1);
      if (n % 5 == 0) begin
        @(posedge clk); resend <= 1;
        @(posedge clk); resend <= 0;
        read_check(p, 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
