// tb_fnet_debug_counters: random event pulses on eight inputs, at most one
// event in any five clocks overall (the update process serves one flag every
// four clocks, so this rate is always kept up with), sometimes two sources at
// once, with periodic read-outs of random counters. Each read is
// compared with the number of events given to that counter: it must be at
// least the count at the request minus the updates still pending and never
// more than the final count; after the events stop every counter must read
// exactly its total.
module tb_fnet_debug_counters;
  localparam int N = 8, AW = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N-1:0]  events = 0;
  logic          rd_req = 0, rd_valid;
  logic [AW-1:0] rd_addr = 0;
  logic [31:0]   rd_data;
  int            total [N];
  int            last_fire [N];
  int checks = 0, failures = 0;
  bit running = 1;
  int cyc = 0;

  fnet_debug_counters #(.N(N)) dut (.clk, .rst, .events, .rd_req, .rd_addr, .rd_valid, .rd_data);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // event sources
  int last_any = 0;
  always @(posedge clk) begin
    automatic logic [N-1:0] ev = '0;
    cyc++;
    if (running && !rst && cyc - last_any >= 10 && $urandom_range(0, 2) == 0) begin
      // two events at once need two update slots: keep 10 clocks apart
      ev[$urandom_range(0, N - 1)] = 1'b1;
      if ($urandom_range(0, 3) == 0) ev[$urandom_range(0, N - 1)] = 1'b1;
      last_any = cyc;
    end
    for (int i = 0; i < N; i++) if (ev[i]) total[i]++;
    events <= ev;
  end

  task automatic read(int a, output logic [31:0] v);
    int t = 0;
    @(posedge clk);
    rd_req  <= 1;
    rd_addr <= AW'(a);
    @(posedge clk);
    rd_req <= 0;
    while (!rd_valid && t < 20) begin @(posedge clk); t++; end
    chk(rd_valid, "read answered within 20 clocks");
    v = rd_data;
  endtask

  initial begin
    logic [31:0] v;
    foreach (total[i]) begin total[i] = 0; last_fire[i] = -100; end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (20) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom_range(0, N - 1);
      automatic int before_cnt = total[a];
      read(a, v);
      chk(int'(v) <= total[a] && int'(v) + 2 >= before_cnt,
          $sformatf("counter %0d read %0d, events %0d..%0d", a, v, before_cnt, total[a]));
      repeat ($urandom_range(0, 30)) @(posedge clk);
    end
    running = 0;
    repeat (100) @(posedge clk);
    for (int a = 0; a < N; a++) begin
      read(a, v);
      chk(int'(v) == total[a], $sformatf("final counter %0d = %0d, expected %0d", a, v, total[a]));
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
