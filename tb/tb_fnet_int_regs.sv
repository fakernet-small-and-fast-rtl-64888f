// tb_fnet_int_regs: exercises the internal register block through its
// access interface: default values after reset, write and read back of the
// payload limit, window limit and generator control, the TCP reset pulse,
// the status word (TCP state, overflow, active channels, driven here at
// random), the RTT estimate, debug counter read-out through a counter model
// with a random answer delay, and that unknown addresses give no int_done
// (so the register access FSM times out on them).
module tb_fnet_int_regs;
  import fnet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [REG_AW-1:0] int_addr = 0;
  logic [31:0]       int_data_wr = 0, int_data_rd;
  logic              int_write = 0, int_read = 0, int_done;
  logic [1:0]        udp_ch_active = 0;
  tcp_state_e        tcp_state = TCP_CLOSED;
  logic              overflow = 0;
  logic [15:0]       rtt_est = 16'd321;
  logic              tcp_reset_req, gen_enable;
  logic [15:0]       cfg_max_payload, cfg_win_limit;
  logic [7:0]        gen_len;
  logic              cnt_rd_req, cnt_rd_valid = 0;
  logic [2:0]        cnt_rd_addr;
  logic [31:0]       cnt_rd_data = 0;
  int checks = 0, failures = 0, resets = 0;

  fnet_int_regs dut (.clk, .rst, .int_addr, .int_data_wr, .int_write, .int_read, .int_data_rd,
    .int_done, .udp_ch_active, .tcp_state, .overflow, .rtt_est, .tcp_reset_req, .cfg_max_payload,
    .cfg_win_limit, .gen_enable, .gen_len, .cnt_rd_req, .cnt_rd_addr, .cnt_rd_valid, .cnt_rd_data);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  // counter RAM model: counter i holds 1000 + i, answered after 2..6 clocks
  always @(posedge clk) begin
    cnt_rd_valid <= 0;
    if (tcp_reset_req) resets++;
    if (cnt_rd_req) begin
      automatic logic [2:0] a = cnt_rd_addr;
      fork
        begin
          repeat ($urandom_range(1, 5)) @(posedge clk);
          cnt_rd_valid <= 1;
          cnt_rd_data  <= 32'd1000 + 32'(a);
        end
      join_none
    end
  end

  task automatic access(bit wr, logic [11:0] a, logic [31:0] d, output logic [31:0] v, output bit done);
    int t = 0;
    @(posedge clk);
    int_addr <= REG_AW'(a); int_data_wr <= d;
    int_write <= wr; int_read <= !wr;
    @(posedge clk);
    int_write <= 0; int_read <= 0;
    done = 0;
    while (t < 10) begin
      #1;
      if (int_done) begin done = 1; v = int_data_rd; break; end
      @(posedge clk);
      t++;
    end
  endtask

  initial begin
    logic [31:0] v;
    bit d;
    repeat (3) @(posedge clk);
    rst <= 0;
    access(0, 12'h002, 0, v, d); chk(d && v == 32'd1440, "default max payload 1440");
    access(0, 12'h003, 0, v, d); chk(d && v == 32'hFFFF, "default window limit");
    access(0, 12'h004, 0, v, d); chk(d && v == 32'h1000, "default generator: off, 16 words");
    access(0, 12'h005, 0, v, d); chk(d && v == 32'd321, "RTT estimate");
    for (int n = 0; n < 50; n++) begin
      automatic logic [15:0] x = 16'($urandom);
      access(1, 12'h002, {16'h0, x}, v, d); chk(d && cfg_max_payload == x, "max payload written");
      access(0, 12'h002, 0, v, d);          chk(d && v[15:0] == x, "max payload read back");
      access(1, 12'h003, {16'h0, ~x}, v, d); chk(d && cfg_win_limit == ~x, "window limit written");
      access(1, 12'h004, {16'h0, x}, v, d);
      chk(d && gen_enable == x[0] && gen_len == x[15:8], "generator control written");
      udp_ch_active = 2'($urandom);
      tcp_state = tcp_state_e'($urandom_range(0, 2));
      overflow = 1'($urandom);
      @(posedge clk);
      access(0, 12'h000, 0, v, d);
      chk(d && v[1:0] == 2'(tcp_state) && v[2] == overflow && v[9:8] == udp_ch_active, "status word");
      begin
        automatic int c = $urandom_range(0, 7);
        access(0, 12'h100 + 12'(c), 0, v, d);
        chk(d && v == 32'd1000 + 32'(c), "debug counter read");
      end
    end
    resets = 0;
    access(1, 12'h001, 1, v, d);
    repeat (2) @(posedge clk);
    chk(d && resets == 1, "TCP reset: one pulse");
    access(0, 12'h0FF, 0, v, d); chk(!d, "unknown read address not answered");
    access(1, 12'h0FF, 0, v, d); chk(!d, "unknown write address not answered");
    rst <= 1; @(posedge clk); rst <= 0;
    access(0, 12'h002, 0, v, d); chk(d && v == 32'd1440, "reset restores max payload");
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
