// tb_eject_pe: self-checking test of the ejection PE.
// Streams packets into the PE with random run; checks that only the header is kept, that
// rd_valid rises exactly after the last flit of a packet with that header on rd_flit, that
// the PE refuses flits while its 1-flit FIFO is full, and that rd_en empties it.
module tb_eject_pe;
  import emunoc_pkg::*;
  logic  clk = 1'b0;
  logic  rst_n, run;
  logic  s_valid, s_last, s_ready;
  flit_t s_flit;
  logic  rd_valid, rd_en;
  flit_t rd_flit;
  int checks = 0, failures = 0;

  eject_pe dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  flit_t src_f[$];
  logic  src_l[$];
  pkt_t  exp_q[$];
  int    refused = 0;
  int    got = 0;

  always @(negedge clk) begin
    run     = ($urandom_range(0, 3) != 0);
    s_valid = src_f.size() > 0;
    s_flit  = s_valid ? src_f[0] : '0;
    s_last  = s_valid ? src_l[0] : 1'b0;
    rd_en   = rd_valid && ($urandom_range(0, 3) == 0);
  end

  logic was_valid = 1'b0;
  logic last_moved = 1'b0;
  always @(posedge clk) if (rst_n) begin
    // rd_valid must rise exactly one edge after a last flit was accepted
    if (rd_valid && !was_valid) check(last_moved, "read valid after the last flit");
    if (!rd_valid && was_valid) ;  // emptied by rd_en
    if (rd_en && rd_valid) begin
      check(rd_flit == conv(exp_q[0]), "stored flit is the header");
      void'(exp_q.pop_front());
      got++;
    end
    if (s_valid && run && !s_ready) refused++;
    if (s_valid && rd_valid) check(!s_ready, "no flit accepted while the 1-flit FIFO is full");
    last_moved = run && s_valid && s_ready && s_last;
    if (run && s_valid && s_ready) begin
      void'(src_f.pop_front());
      void'(src_l.pop_front());
    end
    was_valid = rd_valid;
  end

  initial begin
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 25; i++) begin
      pkt_t p;
      int len;
      len = 1 + (i % 5);
      p.src = 8'(i); p.dst = 8'd2; p.len = 4'(len); p.tag = 12'(300 + i);
      for (int k = 0; k < len; k++) begin
        src_f.push_back(k == 0 ? conv(p) : payload_flit(p, 4'(k)));
        src_l.push_back(k == len - 1);
      end
      exp_q.push_back(p);
    end
    wait (got == 25);
    repeat (3) @(posedge clk);
    check(!rd_valid && exp_q.size() == 0, "all headers read");
    check(refused > 0, "back-pressure while full was exercised");
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
