// tb_sp_injector: self-checking test of the serial-to-parallel injector (4 nodes).
// Sends stream transactions {injection cycle, packet words..., tlast} and plays the clock
// halter (stop) and the PE FIFOs (full). Checks that the injection cycle is written once per
// transaction, that no packet is taken before stop, that each packet reaches the FIFO of its
// source node as a correctly typed header flit, and that a full FIFO holds the stream back.
module tb_sp_injector;
  import emunoc_pkg::*;
  localparam int NN = 4;

  logic              clk = 1'b0;
  logic              rst_n;
  logic [31:0]       s_axis_tdata;
  logic              s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic [31:0]       injection_cycle;
  logic              write_enable, stop;
  logic [NN-1:0]     pe_wr, pe_full;
  flit_t             pe_wdata;
  int checks = 0, failures = 0;

  sp_injector #(.NUM_NODES(NN)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // expected FIFO writes
  pkt_t exp_q[$];
  int   we_seen = 0;
  logic [31:0] last_icyc;
  int   bp_cycles = 0;

  always @(posedge clk) if (rst_n) begin
    if (write_enable) begin we_seen++; last_icyc = injection_cycle; end
    if (pe_wr != '0) begin
      pkt_t e;
      check($onehot(pe_wr), "one FIFO written at a time");
      check(stop, "packets only after stop");
      if (exp_q.size() == 0) check(1'b0, "unexpected FIFO write");
      else begin
        e = exp_q.pop_front();
        check(pe_wr == NN'(1) << e.src, "written into the source node's FIFO");
        check(pe_wdata.data == 32'(e), "header flit carries the packet word");
        check(pe_wdata.ftype == ((e.len <= 1) ? FLIT_HEADTAIL : FLIT_HEAD), "header flit type");
      end
    end
    if (s_axis_tvalid && !s_axis_tready) bp_cycles++;
  end

  task automatic send(input logic [31:0] w, input logic last);
    @(negedge clk);
    s_axis_tdata = w; s_axis_tlast = last; s_axis_tvalid = 1'b1;
    @(posedge clk);
    while (!s_axis_tready) @(posedge clk);
    @(negedge clk) s_axis_tvalid = 1'b0;
  endtask

  function automatic pkt_t mk(int src, int dst, int len, int tag);
    pkt_t p;
    p.src = 8'(src); p.dst = 8'(dst); p.len = 4'(len); p.tag = 12'(tag);
    return p;
  endfunction

  // clock-halter stand-in: stop drops 1 cycle after a write and returns 6 cycles later
  int run_left = 0;
  always @(posedge clk) begin
    if (!rst_n) begin stop <= 1'b1; run_left <= 0; end
    else if (write_enable) begin stop <= 1'b0; run_left <= 6; end
    else if (run_left > 1) run_left <= run_left - 1;
    else if (run_left == 1) begin run_left <= 0; stop <= 1'b1; end
  end

  initial begin
    pkt_t p;
    int bp0;
    rst_n = 1'b0; s_axis_tvalid = 1'b0; s_axis_tdata = '0; s_axis_tlast = 1'b0; pe_full = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // quantum 1: three packets
    send(32'd20, 1'b0);
    check(we_seen == 1 && last_icyc == 32'd20, "injection cycle 20 written");
    p = mk(1, 2, 5, 7);  exp_q.push_back(p); send(p, 1'b0);
    p = mk(3, 0, 1, 8);  exp_q.push_back(p); send(p, 1'b0);
    p = mk(1, 3, 2, 9);  exp_q.push_back(p); send(p, 1'b1);
    check(bp_cycles >= 5, "stream held back until stop");
    repeat (2) @(posedge clk);
    check(exp_q.size() == 0, "all packets of quantum 1 written");

    // quantum 2: empty quantum (cycle word only)
    send(32'd30, 1'b1);
    check(we_seen == 2 && last_icyc == 32'd30, "injection cycle 30 written");
    wait (stop);

    // quantum 3: the FIFO of node 2 is full for a while
    send(32'd31, 1'b0);
    wait (stop);
    pe_full[2] = 1'b1;
    bp0 = bp_cycles;
    fork
      begin p = mk(2, 1, 3, 10); exp_q.push_back(p); send(p, 1'b1); end
      begin repeat (8) @(posedge clk); @(negedge clk) pe_full[2] = 1'b0; end
    join
    check(bp_cycles - bp0 >= 8, "full FIFO holds the stream back");
    repeat (2) @(posedge clk);
    check(exp_q.size() == 0, "packet written after the FIFO freed");
    check(we_seen == 3, "three injection cycles in total");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
