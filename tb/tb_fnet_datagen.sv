// tb_fnet_datagen: runs the data generator against a model of the data
// interface. Collects the words written at each offset and, at each commit,
// checks that exactly offsets 0..len-1 were written since the last commit,
// that len equals the configured group length, and that the words continue
// the running counter. data_free is toggled at random and must hold the
// generator back; disabling it must stop all writes.
module tb_fnet_datagen;
  localparam int OB = 7;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic          enable = 0, data_free = 0;
  logic [7:0]    group_len = 16;
  logic [31:0]   data_word;
  logic [OB-1:0] data_offset;
  logic          data_write, data_commit;
  logic [OB:0]   data_commit_len;
  int checks = 0, failures = 0;
  logic [31:0] got [2**OB];
  bit          have [2**OB];
  logic [31:0] next_val = 0;
  int groups = 0, writes_disabled = 0, starts_not_free = 0;
  bit in_group = 0;

  fnet_datagen #(.OFFSET_BITS(OB)) dut (.clk, .rst, .enable, .group_len, .data_free, .data_word,
    .data_offset, .data_write, .data_commit_len, .data_commit);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic free_q = 0, en_q = 0;
  always @(posedge clk) begin
    if (data_write && !en_q) writes_disabled++;
    if (data_write && !in_group) begin
      in_group = 1;
      // the group began in the clock after data_free was seen
    end
    if (data_write) begin
      got[data_offset] = data_word;
      have[data_offset] = 1;
    end
    if (data_commit) begin
      automatic bit ok = 1;
      automatic int expect_len = (group_len > 128) ? 128 : group_len;
      chk(int'(data_commit_len) == expect_len, "commit length is the group length");
      for (int i = 0; i < 2**OB; i++) begin
        if ((i < data_commit_len) != have[i]) ok = 0;
        if (i < data_commit_len && have[i] && got[i] != next_val + 32'(i)) ok = 0;
      end
      chk(ok, "group holds consecutive counter values");
      next_val += 32'(data_commit_len);
      foreach (have[i]) have[i] = 0;
      groups++;
      in_group = 0;
    end
    free_q <= data_free;
    en_q   <= enable;
  end

  initial begin
    foreach (have[i]) have[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    enable <= 1;
    repeat (50) @(posedge clk);
    chk(groups == 0, "nothing generated while data_free is low");
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      data_free <= ($urandom_range(0, 3) != 0);
      if (n % 500 == 0 && !in_group) group_len <= 8'($urandom_range(1, 200));
    end
    data_free <= 1;
    repeat (300) @(posedge clk);
    chk(groups > 20, $sformatf("groups generated (%0d)", groups));
    enable <= 0;
    repeat (300) @(posedge clk);
    chk(writes_disabled == 0, "no writes while disabled");
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
