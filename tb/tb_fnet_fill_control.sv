// tb_fnet_fill_control: a user model writes groups of words (in random order
// of offsets) and commits them while a TCP model acknowledges random amounts.
// A model of the data buffer RAM records the writes; after each commit the
// committed words must sit at consecutive buffer addresses following the
// previous ones. data_free must only be high when at least 3*128 words are
// free (checked against the model with its two-clock delay), and avail must
// count the committed octets. Finally the user ignores data_free until the
// overflow flag rises, which must stop all further writes, and a TCP reset
// must clear everything.
module tb_fnet_fill_control;
  localparam int BUF_AW = 10, OB = 7, DEPTH = 1024, MAXC = 128;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic              tcp_reset = 0;
  logic [31:0]       data_word = 0;
  logic [OB-1:0]     data_offset = 0;
  logic              data_write = 0, data_commit = 0;
  logic [OB:0]       data_commit_len = 0;
  logic              data_free, tcp_reset_out;
  logic              buf_wr_en;
  logic [BUF_AW-1:0] buf_wr_addr;
  logic [31:0]       buf_wr_data;
  logic [31:0]       base = 0, avail;
  logic              overflow;
  logic [31:0]       bufm [DEPTH];
  int checks = 0, failures = 0, writes_after_ovf = 0;
  longint committed = 0;   // words
  logic [31:0] ctr = 0;

  fnet_fill_control #(.BUF_AW(BUF_AW), .OFFSET_BITS(OB)) dut (.clk, .rst, .tcp_reset, .data_word,
    .data_offset, .data_write, .data_commit_len, .data_commit, .data_free, .tcp_reset_out,
    .buf_wr_en, .buf_wr_addr, .buf_wr_data, .base, .avail, .overflow);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  logic ovf_q = 0;
  always @(posedge clk) begin
    if (buf_wr_en) begin
      bufm[buf_wr_addr] = buf_wr_data;
      if (ovf_q) writes_after_ovf++;
    end
    ovf_q <= overflow;
  end

  // free space as seen by the design two clocks ago must justify data_free
  int free_hist [4];
  always @(posedge clk) begin
    free_hist[3] = free_hist[2]; free_hist[2] = free_hist[1]; free_hist[1] = free_hist[0];
    free_hist[0] = DEPTH - int'(avail[31:2] - base[31:2]);
    if (data_free && !rst) chk(free_hist[2] >= 3 * MAXC || free_hist[1] >= 3 * MAXC, "data_free only with 384 words free");
  end

  task automatic put_group(int n);
    int order[$];
    for (int i = 0; i < n; i++) order.push_back(i);
    order.shuffle();
    for (int k = 0; k < n; k++) begin
      @(posedge clk);
      data_word   <= ctr + 32'(order[k]);
      data_offset <= OB'(order[k]);
      data_write  <= 1;
      data_commit <= (k == n - 1);
      data_commit_len <= (OB+1)'(n);
    end
    @(posedge clk);
    data_write <= 0; data_commit <= 0;
    ctr += 32'(n);
  endtask

  initial begin
    foreach (free_hist[i]) free_hist[i] = DEPTH;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    for (int g = 0; g < 200; g++) begin
      automatic int n = $urandom_range(1, MAXC);
      automatic int t = 0;
      while (!data_free && t < 1000) begin
        @(posedge clk); t++;
        // TCP model: acknowledge some committed data
        if ($urandom_range(0, 3) == 0 && base != avail) begin
          automatic int outstanding = int'(avail[31:2] - base[31:2]);
          base <= base + 32'(4 * $urandom_range(1, outstanding));
        end
      end
      chk(data_free, "data_free returns after acknowledgements");
      put_group(n);
      repeat (5) @(posedge clk);   // two input stages, the write register, the model
      chk(avail == 32'(4 * (committed + n)), "avail counts committed octets");
      begin
        automatic bit ok = 1;
        for (int i = 0; i < n; i++)
          if (bufm[BUF_AW'(committed + i)] != ctr - 32'(n) + 32'(i)) ok = 0;
        if (!ok && failures < 2) for (int i = 0; i < 4; i++) $display("  %0d: %h expect %h", i, bufm[BUF_AW'(committed + i)], ctr - 32'(n) + 32'(i));
        chk(ok, "group stored at consecutive buffer addresses");
      end
      committed += n;
    end
    chk(!overflow, "no overflow while data_free was respected");
    // ignore data_free, no acknowledgements
    for (int g = 0; g < 12 && !overflow; g++) put_group(MAXC);
    repeat (3) @(posedge clk);
    chk(overflow, "overflow raised");
    put_group(10);
    repeat (3) @(posedge clk);
    chk(writes_after_ovf == 0, "no buffer writes after overflow");
    chk(!data_free, "data_free low after overflow");
    @(posedge clk); tcp_reset <= 1; base <= 0;
    @(posedge clk); tcp_reset <= 0;
    repeat (6) @(posedge clk);
    chk(!overflow && avail == 0 && data_free, "TCP reset clears overflow and avail");
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
