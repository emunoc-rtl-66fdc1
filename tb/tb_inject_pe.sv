// tb_inject_pe: self-checking test of the injection PE.
// Pushes header flits into the FIFO (also while run is low), toggles run and m_ready at
// random, and checks the flit stream: header first, len-1 payload flits with the right types,
// m_last on the final flit, packets in FIFO order, nothing moving while run is low. Also
// checks the full flag and the rate: with run and ready always high, a packet of len flits
// takes exactly len cycles.
module tb_inject_pe;
  import emunoc_pkg::*;
  logic  clk = 1'b0;
  logic  rst_n, run;
  logic  wr_en, full;
  flit_t wr_flit;
  logic  m_valid, m_last, m_ready;
  flit_t m_flit;
  int checks = 0, failures = 0;

  inject_pe #(.FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  function automatic pkt_t mk(int len, int tag);
    pkt_t p;
    p.src = 8'd3; p.dst = 8'd9; p.len = 4'(len); p.tag = 12'(tag);
    return p;
  endfunction

  pkt_t exp_q[$];
  pkt_t cur;
  int   fidx = 0;
  int   flits = 0;
  logic rand_mode = 1'b1;

  always @(negedge clk) begin
    run     = rand_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
    m_ready = rand_mode ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  always @(posedge clk) if (rst_n && run && m_valid && m_ready) begin
    flits++;
    if (fidx == 0) begin
      if (exp_q.size() == 0) begin check(1'b0, "flit without packet"); end
      else begin
        cur = exp_q[0];
        check(m_flit == conv(cur), "header flit first");
      end
    end else begin
      check(m_flit.ftype == ((fidx == cur.len - 1) ? FLIT_TAIL : FLIT_BODY), "payload flit type");
    end
    check(m_last == (fidx == cur.len - 1 || cur.len <= 1), "m_last on the last flit");
    if (m_last) begin
      void'(exp_q.pop_front());
      fidx = 0;
    end else fidx++;
  end

  task automatic push(input pkt_t p);
    @(negedge clk);
    wr_en = 1'b1; wr_flit = conv(p);
    exp_q.push_back(p);
    @(negedge clk) wr_en = 1'b0;
  endtask

  initial begin
    int t0, t1;
    rst_n = 1'b0; wr_en = 1'b0; wr_flit = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    push(mk(5, 1)); push(mk(1, 2)); push(mk(3, 3)); push(mk(2, 4));
    #1 check(full == (exp_q.size() == 4) || exp_q.size() < 4, "full flag consistent");
    for (int i = 0; i < 12; i++) begin
      wait (!full);
      push(mk(1 + (i % 5), 10 + i));
    end
    wait (exp_q.size() == 0);
    // rate: 5-flit packet in 5 cycles with run and ready high
    rand_mode = 1'b0;
    @(negedge clk);
    push(mk(5, 99));
    t0 = flits;
    repeat (5) @(posedge clk);
    #1 t1 = flits;
    check(t1 - t0 == 5 && exp_q.size() == 0, "one flit per cycle");
    // nothing moves while run is low
    rand_mode = 1'b0;
    @(negedge clk);
    force run = 1'b0;
    push(mk(2, 100));
    repeat (4) @(posedge clk);
    check(exp_q.size() == 1 && fidx == 0, "no flit while halted");
    release run;
    repeat (4) @(posedge clk);
    check(exp_q.size() == 0, "sent after run returns");
    check(flits == 5 + 1 + 3 + 2 + 33 + 5 + 2, "total flit count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
