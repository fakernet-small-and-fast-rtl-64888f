// tb_fnet_regacc_fsm: feeds register access request packets (built as the
// input FSM leaves them in its RAM) to the register access FSM and checks
// the result packets it writes. A user register model answers after 1..12
// clocks or not at all, an internal register model after 1..3 clocks.
// Checked: every non-access word copied unchanged (the reply word equal to
// the request word), each access marked done exactly when it was answered
// within the timeout, read data returned and write data kept, writes
// performed once in packet order with the right data, internal accesses
// routed to the internal interface, the recomputed UDP checksum valid, one
// ra_release per packet, and nothing started while the result RAM is full.
module tb_fnet_regacc_fsm;
  import fnet_pkg::*;
  import fnet_tb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [PKT_AW-1:0] ra_rd_addr;
  logic [15:0]       ra_rd_data;
  logic              ra_ready, ra_release;
  logic [PKT_AW:0]   ra_len = 0;
  pkt_wr_t           rr_wr;
  logic              rr_commit, rr_ready = 0, busy;
  logic [PKT_AW:0]   rr_len;
  logic [REG_AW-1:0] reg_addr;
  logic [31:0]       reg_data_wr, reg_data_rd = 0, int_data_rd = 0;
  logic              reg_write, reg_read, reg_done = 0, int_write, int_read, int_done = 0;
  logic [15:0]       ra_mem [2**PKT_AW];
  logic [15:0]       rr_mem [2**PKT_AW];
  bit ra_set = 0;
  int checks = 0, failures = 0, releases = 0, commits = 0, started_full = 0;
  int user_delay [$];   // per user access: delay or -1 for no answer
  logic [31:0] regs [16];
  logic [31:0] wr_log [$];

  fnet_regacc_fsm dut (.clk, .rst, .ra_rd_addr, .ra_rd_data, .ra_ready, .ra_len, .ra_release,
    .rr_wr, .rr_commit, .rr_len, .rr_ready, .busy, .reg_addr, .reg_data_wr, .reg_data_rd,
    .reg_write, .reg_read, .reg_done, .int_write, .int_read, .int_data_rd, .int_done);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  always @(posedge clk) begin
    ra_rd_data <= ra_mem[ra_rd_addr];
    if (rr_wr.en) rr_mem[rr_wr.addr] = rr_wr.data;
    if (ra_release) begin releases++; ra_ready <= 0; end
    else if (ra_set) ra_ready <= 1;
    ra_set = 0;
    if (rr_commit) commits++;
    if (busy && rr_ready) started_full++;
  end

  // user registers: 16 words, answer after a drawn delay or never
  always @(posedge clk) begin
    reg_done <= 0;
    if (reg_read || reg_write) begin
      automatic int d = (user_delay.size() > 0) ? user_delay.pop_front() : 1;
      automatic logic [3:0] a = reg_addr[3:0];
      automatic logic [31:0] wd = reg_data_wr;
      automatic bit w = reg_write;
      if (d >= 0) fork
        begin
          repeat (d) @(posedge clk);
          if (w) begin regs[a] = wd; wr_log.push_back({28'h0, a} ^ wd); end
          reg_data_rd <= regs[a];
          reg_done <= 1;
          @(posedge clk);
          reg_done <= 0;
        end
      join_none
    end
  end
  // internal registers: read gives the address inverted
  always @(posedge clk) begin
    int_done <= 0;
    if (int_read || int_write) begin
      automatic logic [31:0] v = ~{7'h0, reg_addr};
      fork
        begin
          repeat ($urandom_range(0, 2)) @(posedge clk);
          int_data_rd <= v;
          int_done <= 1;
          @(posedge clk);
          int_done <= 0;
        end
      join_none
    end
  end

  initial begin
    foreach (regs[i]) regs[i] = 32'hB000_0000 + i;
    ra_ready = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 150; n++) begin
      automatic int na = $urandom_range(0, 12);
      automatic logic [31:0] addrs[$], datas[$], expect_rd[$];
      automatic bit answered[$], is_wr[$], is_int[$];
      automatic logic [31:0] regs_before [16];
      automatic wq_t p, r;
      automatic int len;
      automatic logic [15:0] reqw = 16'($urandom) & 16'h0FFF;
      regs_before = regs;
      user_delay = {};
      wr_log = {};
      for (int i = 0; i < na; i++) begin
        automatic int kind = $urandom_range(0, 9);
        automatic logic [31:0] a = 32'($urandom_range(0, 15));
        automatic logic [31:0] d = $urandom;
        if (kind < 4) begin a[31] = 1; is_wr.push_back(0); is_int.push_back(0); end
        else if (kind < 8) begin a[30] = 1; is_wr.push_back(1); is_int.push_back(0); end
        else begin a[31] = 1; a[27] = 1; a[11:0] = 12'($urandom); is_wr.push_back(0); is_int.push_back(1); end
        addrs.push_back(a); datas.push_back(d);
        if (!is_int[i]) begin
          // answered within the 10-clock timeout, or never (an answer after
          // the timeout would be taken for the next access: the user
          // circuit must not give one)
          automatic int dl = ($urandom_range(0, 5) == 0) ? -1 : $urandom_range(1, 6);
          user_delay.push_back(dl);
          answered.push_back(dl >= 0 && dl <= 6);
        end else answered.push_back(1);
      end
      p = udp_req(16'd7, 16'd1, reqw, addrs, datas);
      len = p.size() - 2;
      foreach (ra_mem[i]) ra_mem[i] = 16'h0;
      for (int i = 0; i < len; i++) ra_mem[i] = p[i];
      // sometimes the result RAM is still full when the request arrives
      if (n % 7 == 3) rr_ready <= 1;
      @(posedge clk);
      ra_len <= (PKT_AW+1)'(len);
      ra_set = 1;
      if (n % 7 == 3) begin
        repeat (50) @(posedge clk);
        chk(commits == n && !busy, "no start while the result RAM is full");
        rr_ready <= 0;
      end
      while (commits == n) @(posedge clk);
      rr_ready <= 1;
      @(posedge clk);
      chk(int'(rr_len) == len, "result length");
      for (int i = 0; i < len; i++) r.push_back(rr_mem[i]);
      chk(l4_csum_ok(r, 8'd17), "UDP checksum of the result");
      begin
        automatic bit ok = 1;
        for (int i = 0; i < W_RA_REPLY; i++) if (i != W_UDP_CSUM && r[i] != p[i]) ok = 0;
        chk(ok, "header words copied");
        chk(r[W_RA_REPLY] == p[W_RA_REQ], "reply word echoes the request word");
      end
      for (int i = 0; i < na; i++) begin
        automatic logic [31:0] ra = {r[25 + 4*i], r[26 + 4*i]};
        automatic logic [31:0] rd = {r[27 + 4*i], r[28 + 4*i]};
        automatic bit done = ra[29];
        chk(done == answered[i], $sformatf("access %0d done flag", i));
        chk((ra & ~32'h2000_0000) == addrs[i], "address kept");
        if (done && !is_wr[i] && is_int[i]) chk(rd == ~{7'h0, addrs[i][24:0]}, "internal read data");
        if (is_wr[i]) chk(rd == datas[i], "write data kept");
        if (!done && !is_wr[i]) chk(rd == datas[i], "failed read keeps the data words");
      end
      chk(releases == n + 1, "one release per packet");
      repeat ($urandom_range(1, 20)) @(posedge clk);
      rr_ready <= 0;
      repeat (30) @(posedge clk);   // let late answers of timed-out accesses pass
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
