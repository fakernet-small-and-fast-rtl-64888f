// tb_fnet_out_fsm: four packet sources modelled as memories with registered
// reads and ready/length/release handshakes. Random packets are offered on
// random sources while out_taken is driven at random. Every transmitted frame
// must have the 4-word preamble (5555 5555 5555 55D5), the packet words of
// the chosen source, a correct FCS and at least six idle words before the
// next frame. Order: when several sources are ready, source 0 goes first,
// then 1, and the two TCP sources (2, 3) are served alternately.
module tb_fnet_out_fsm;
  import fnet_pkg::*;
  import fnet_tb_pkg::*;
  localparam int NSRC = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [PKT_AW-1:0] rd_addr;
  logic [15:0]       rd_data [NSRC];
  logic [NSRC-1:0]   src_ready, src_release;
  logic [PKT_AW:0]   src_len [NSRC];
  logic [15:0]       out_word;
  logic              out_ena, out_payload, out_taken = 0, ev_tx;
  logic [15:0]       mem [NSRC][2**PKT_AW];
  wq_t               sent [NSRC][$];
  wq_t               expect_q[$];
  int checks = 0, failures = 0, frames = 0, txev = 0, tcp_turn = 0;

  fnet_out_fsm #(.NSRC(NSRC)) dut (.clk, .rst, .rd_addr, .rd_data, .src_ready, .src_len,
    .src_release, .out_word, .out_ena, .out_payload, .out_taken, .ev_tx);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  bit set_req [NSRC];
  always @(posedge clk) begin
    for (int s = 0; s < NSRC; s++) rd_data[s] <= mem[s][rd_addr];
    for (int s = 0; s < NSRC; s++) begin
      if (src_release[s]) src_ready[s] <= 1'b0;
      if (set_req[s]) begin src_ready[s] <= 1'b1; set_req[s] = 0; end
    end
    if (ev_tx && !rst) txev++;
  end

  // receiver
  initial begin
    automatic wq_t cur = {};
    automatic int npre = 0, idle = 100;
    automatic bit pre_ok = 1;
    forever begin
      @(posedge clk);
      if (out_taken) begin
        if (out_ena && !out_payload) begin
          chk(idle >= 6 || npre > 0, "gap of six words before a frame");
          pre_ok = pre_ok && (out_word == ((npre == 3) ? 16'h55D5 : 16'h5555));
          npre++;
          idle = 0;
        end else if (out_ena) cur.push_back(out_word);
        else begin
          if (cur.size() > 0) begin
            chk(npre == 4 && pre_ok, "preamble");
            chk(fcs_ok(cur), "FCS");
            chk(expect_q.size() > 0, "frame expected");
            if (expect_q.size() > 0) begin
              automatic wq_t e = expect_q.pop_front();
              chk(cur.size() == e.size() + 2, "frame length");
              for (int i = 0; i < e.size() && i < cur.size(); i++) chk(cur[i] == e[i], $sformatf("frame word %0d: %h vs %h (len %0d/%0d)", i, cur[i], e[i], cur.size(), e.size()));
            end
            frames++;
            cur = {};
            npre = 0;
            pre_ok = 1;
          end
          idle++;
        end
      end
      out_taken <= ($urandom_range(0, 4) != 0);
    end
  end

  // offers packets on sources 0..3; the expected order follows the priority
  task automatic offer(int s);
    wq_t p;
    int n = $urandom_range(30, 200);
    for (int i = 0; i < n; i++) begin
      p.push_back(16'($urandom));
      mem[s][i] = p[i];
    end
    src_len[s] = (PKT_AW+1)'(n);
    sent[s].push_back(p);
    set_req[s] = 1;
  endtask

  initial begin
    foreach (src_len[s]) src_len[s] = 30;
    foreach (set_req[s]) set_req[s] = 0;
    src_ready = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    // all four ready at once: expect 0, 1, 2, then 3
    @(negedge clk);
    offer(0); offer(1); offer(2); offer(3);
    expect_q.push_back(sent[0][0]); expect_q.push_back(sent[1][0]);
    expect_q.push_back(sent[2][0]); expect_q.push_back(sent[3][0]);
    foreach (sent[s]) sent[s] = {};
    repeat (2) @(posedge clk);
    while (src_ready != 0) @(posedge clk);
    repeat (200) @(posedge clk);
    chk(frames == 4 && expect_q.size() == 0, "four frames in priority order");
    // one source at a time, random; TCP sources in ping-pong order
    for (int n = 0; n < 100; n++) begin
      automatic int s = $urandom_range(0, 2);
      if (s == 2) begin
        s = 2 + tcp_turn;   // the TCP packets come alternately from the two RAMs
        tcp_turn = 1 - tcp_turn;
      end
      @(negedge clk);
      offer(s);
      expect_q.push_back(sent[s].pop_front());
      repeat (2) @(posedge clk);
      while (src_ready != 0) @(posedge clk);
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    repeat (500) @(posedge clk);
    chk(expect_q.size() == 0, "all frames sent");
    chk(txev == frames, "one ev_tx per frame");
    $display("frames %0d", frames);
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
