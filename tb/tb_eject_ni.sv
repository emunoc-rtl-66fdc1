// tb_eject_ni: self-checking test of the ejection NI (2 VCs, 5-flit FIFOs).
// A router stand-in interleaves the flits of packets on both VCs (respecting in_ready) with
// random gaps; the PE side has random ready. Checks that a packet is only passed on once all
// of its flits are in the NI (the length comparator), that every packet leaves whole and in
// per-VC order with m_last on its final flit, and that a VC FIFO never overflows.
module tb_eject_ni;
  import emunoc_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n, run;
  logic        in_valid;
  flit_t       in_flit;
  logic [0:0]  in_vc;
  logic [1:0]  in_ready;
  logic        m_valid, m_last, m_ready;
  flit_t       m_flit;
  int checks = 0, failures = 0;

  eject_ni #(.NUM_VC(2), .MAX_PKT_LEN(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  flit_t vcq   [2][$];   // flits still to be sent on each VC
  int    held  [2] = '{0, 0};  // flits given to the NI on each VC and not yet passed on
  int    sent_pkts = 0, got_pkts = 0;
  pkt_t  exp_pkts[2][$];
  pkt_t  cur;
  int    cur_vc, fidx = 0;
  logic  in_pkt = 1'b0;

  always @(negedge clk) begin
    int v;
    run     = ($urandom_range(0, 4) != 0);
    m_ready = ($urandom_range(0, 2) != 0);
    v = $urandom_range(0, 1);
    if (vcq[v].size() == 0) v = 1 - v;
    in_vc    = 1'(v);
    in_valid = (vcq[v].size() > 0) && in_ready[v] && ($urandom_range(0, 2) != 0);
    in_flit  = in_valid ? vcq[v][0] : '0;
  end

  always @(posedge clk) if (rst_n && run) begin
    if (m_valid && m_ready) begin
      if (!in_pkt) begin
        cur_vc = -1;
        for (int v = 0; v < 2; v++)
          if (exp_pkts[v].size() > 0 && m_flit == conv(exp_pkts[v][0])) cur_vc = v;
        check(cur_vc >= 0, "header is the oldest packet of one VC");
        if (cur_vc >= 0) begin
          cur = exp_pkts[cur_vc][0];
          // length comparator: the whole packet must already be inside the NI
          check(held[cur_vc] >= int'(cur.len), "packet complete before it is passed on");
        end
        in_pkt = 1'b1;
        fidx = 0;
      end else begin
        check(m_flit == payload_flit(cur, 4'(fidx)), "payload flit in order");
      end
      check(m_last == (fidx == int'(cur.len) - 1), "m_last on the last flit");
      if (m_last) begin
        in_pkt = 1'b0;
        if (cur_vc >= 0) void'(exp_pkts[cur_vc].pop_front());
        got_pkts++;
      end
      fidx++;
      if (cur_vc >= 0) held[cur_vc]--;
    end
    if (in_valid) begin
      held[int'(in_vc)]++;
      void'(vcq[int'(in_vc)].pop_front());
    end
  end

  task automatic add_packet(input int v, input int len, input int tag);
    pkt_t p;
    p.src = 8'(tag % 7); p.dst = 8'd4; p.len = 4'(len); p.tag = 12'(tag);
    for (int i = 0; i < len; i++) vcq[v].push_back((i == 0) ? conv(p) : payload_flit(p, 4'(i)));
    exp_pkts[v].push_back(p);
    sent_pkts++;
  endtask

  initial begin
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 30; i++) add_packet(i % 2 == 0 ? 0 : ($urandom_range(0, 1)), 1 + (i % 5), i);
    wait (got_pkts == sent_pkts);
    repeat (3) @(posedge clk);
    check(!m_valid, "idle after all packets");
    check(exp_pkts[0].size() == 0 && exp_pkts[1].size() == 0, "all packets delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
