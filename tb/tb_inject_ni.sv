// tb_inject_ni: self-checking test of the injection NI (2 VCs).
// A source sends packets as flit streams; the router side has random per-VC ready. Checks that
// flits leave in order and unchanged, that every flit of a packet uses the VC of its header,
// that a flit only moves to a VC that is ready, that with both VCs always ready consecutive
// packets alternate between the VCs (round robin), and that nothing moves while run is low.
module tb_inject_ni;
  import emunoc_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n, run;
  logic        s_valid, s_last, s_ready;
  flit_t       s_flit;
  logic        out_valid;
  flit_t       out_flit;
  logic [0:0]  out_vc;
  logic [1:0]  out_ready;
  int checks = 0, failures = 0;

  inject_ni #(.NUM_VC(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // source: a list of flits with last flags
  flit_t src_f[$];
  logic  src_l[$];
  flit_t exp_f[$];
  logic  rand_mode = 1'b1;
  logic  force_halt = 1'b0;
  int    vc_of_pkt = -1;
  int    prev_vc = -1;
  int    alternations = 0, pkts = 0, moved = 0;

  always @(negedge clk) begin
    run       = !force_halt && (rand_mode ? ($urandom_range(0, 3) != 0) : 1'b1);
    out_ready = rand_mode ? 2'($urandom_range(0, 3)) : 2'b11;
    s_valid   = src_f.size() > 0;
    s_flit    = s_valid ? src_f[0] : '0;
    s_last    = s_valid ? src_l[0] : 1'b0;
  end

  always @(posedge clk) if (rst_n) begin
    if (run && s_valid && s_ready) begin
      check(out_valid, "out_valid with every accepted flit");
      check(out_ready[out_vc], "flit only to a ready VC");
      check(out_flit == exp_f[0], "flit order and content");
      void'(exp_f.pop_front());
      if (is_head(out_flit)) begin
        vc_of_pkt = int'(out_vc);
        pkts++;
        if (!rand_mode && prev_vc >= 0) begin
          check(vc_of_pkt != prev_vc, "round robin over VCs");
          alternations++;
        end
        prev_vc = vc_of_pkt;
      end else check(int'(out_vc) == vc_of_pkt, "whole packet on one VC");
      void'(src_f.pop_front());
      void'(src_l.pop_front());
      moved++;
    end
  end

  task automatic add_packet(input int len, input int tag);
    pkt_t p;
    p.src = 8'd0; p.dst = 8'd5; p.len = 4'(len); p.tag = 12'(tag);
    for (int i = 0; i < len; i++) begin
      flit_t f;
      f = (i == 0) ? conv(p) : payload_flit(p, 4'(i));
      src_f.push_back(f); src_l.push_back(i == len - 1); exp_f.push_back(f);
    end
  endtask

  initial begin
    int m0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 20; i++) add_packet(1 + (i % 5), i);
    wait (src_f.size() == 0);
    repeat (2) @(posedge clk);
    check(exp_f.size() == 0, "all random-mode flits delivered");
    rand_mode = 1'b0;
    prev_vc = -1;
    for (int i = 0; i < 6; i++) add_packet(2, 100 + i);
    wait (src_f.size() == 0);
    repeat (2) @(posedge clk);
    check(alternations == 5, "alternation observed for every packet");
    force_halt = 1'b1;
    add_packet(3, 200);
    m0 = moved;
    repeat (5) @(posedge clk);
    check(moved == m0, "nothing moves while run is low");
    force_halt = 1'b0;
    repeat (6) @(posedge clk);
    check(exp_f.size() == 0 && pkts == 27, "all packets delivered");
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
