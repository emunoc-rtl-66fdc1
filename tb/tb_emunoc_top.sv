// tb_emunoc_top: end-to-end test of the whole emulator at its default size (13x13 mesh,
// 2 VCs, 5-flit packets), with noc_model standing in for the router mesh.
//
// The initial block plays the software side: it sends time quanta (injection cycle + packet
// words) on s_axis_sp and keeps every packet it sent; a monitor plays the receive side of
// m_axis_ps with random tready, matches every ejected packet word with its sent copy by tag and
// checks source, destination and length, that its ejection cycle is no earlier than its
// injection cycle plus the shortest possible latency, and that ejection cycles never go back.
// A first directed packet checks the exact latency through an idle NoC. It also checks that the
// NoC clock enable, the halting clock and the clock halter's counter agree with the model's
// cycle count. Counted mechanisms (each must occur): quantum stop (injector waiting), ejection
// halt, a batch of several packets in one ejection transaction, use of both VCs, and the stream
// receiver stalling the ejector. A burst of 9 packets from one source checks that the
// injection FIFO absorbs more than one quantum's worth of packets. A full injection FIFO is not
// provoked here: while the NoC is stopped nothing drains it, so the stream would wait forever
// (the software must keep at most INJ_FIFO_DEPTH packets per source in flight).
module tb_emunoc_top;
  import emunoc_pkg::*;
  localparam int NX = 13, NY = 13, NVC = 2, N = NX * NY, HOP = 2;

  logic clk = 1'b0;
  logic rst_n;
  logic [31:0] s_axis_sp_tdata, m_axis_ps_tdata;
  logic        s_axis_sp_tvalid, s_axis_sp_tready, s_axis_sp_tlast;
  logic        m_axis_ps_tvalid, m_axis_ps_tready, m_axis_ps_tlast;
  logic        noc_run, halting_clk;
  logic        noc_inj_valid [N];
  flit_t       noc_inj_flit  [N];
  logic [0:0]  noc_inj_vc    [N];
  logic [1:0]  noc_inj_ready [N];
  logic        noc_ej_valid  [N];
  flit_t       noc_ej_flit   [N];
  logic [0:0]  noc_ej_vc     [N];
  logic [1:0]  noc_ej_ready  [N];
  int checks = 0, failures = 0;

  emunoc_top dut (.*);

  noc_model #(.NOC_X(NX), .NOC_Y(NY), .NUM_VC(NVC), .HOP_LAT(HOP)) u_noc (
    .clk, .rst_n, .run(noc_run),
    .inj_valid(noc_inj_valid), .inj_flit(noc_inj_flit), .inj_vc(noc_inj_vc), .inj_ready(noc_inj_ready),
    .ej_valid (noc_ej_valid),  .ej_flit (noc_ej_flit),  .ej_vc (noc_ej_vc),  .ej_ready (noc_ej_ready)
  );

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  function automatic int hops(int s, int d);
    int sx, sy, dx, dy;
    sx = s % NX; sy = s / NX; dx = d % NX; dy = d / NX;
    return ((sx > dx) ? sx - dx : dx - sx) + ((sy > dy) ? sy - dy : dy - sy);
  endfunction

  // ---------------- software side: bookkeeping ----------------
  pkt_t sent_pkt  [int];     // by tag
  int   sent_icyc [int];
  int   received = 0, sent = 0;
  int   last_ecyc = 0;
  int   exact_ecyc = -1;

  // mechanism counters
  int n_stop_wait = 0, n_halt = 0, n_batch_multi = 0, n_pe_full = 0, n_rx_stall = 0;
  int n_vc [2] = '{0, 0};
  int run_cycles = 0, gclk_pulses = 0;

  always @(posedge halting_clk) gclk_pulses++;

  always @(posedge clk) if (rst_n) begin
    if (noc_run) run_cycles++;
    if (s_axis_sp_tvalid && !s_axis_sp_tready && !dut.stop) n_stop_wait++;
    if (s_axis_sp_tvalid && !s_axis_sp_tready && dut.stop) n_pe_full++;
    if (m_axis_ps_tvalid && !m_axis_ps_tready) n_rx_stall++;
    if (dut.halt && !dut.u_ejector.m_axis_tvalid && dut.u_ejector.state == 2'd0) n_halt++;
    for (int n = 0; n < N; n++)
      if (noc_run && noc_inj_valid[n] && noc_inj_ready[n][noc_inj_vc[n]] && is_head(noc_inj_flit[n]))
        n_vc[noc_inj_vc[n]]++;
  end

  // ---------------- receive side (m_axis_ps) ----------------
  logic rx_slow = 1'b1;
  always @(negedge clk) m_axis_ps_tready = rx_slow ? ($urandom_range(0, 3) != 0) : 1'b1;

  int widx = 0, ecyc = 0, batch = 0;
  always @(posedge clk) if (rst_n && m_axis_ps_tvalid && m_axis_ps_tready) begin
    if (widx == 0) begin
      ecyc = int'(m_axis_ps_tdata);
      check(ecyc >= last_ecyc, "ejection cycles never go back");
      check(ecyc == int'(dut.u_halter.cnt_q), "ejection cycle is the halted counter");
      last_ecyc = ecyc;
      batch = 0;
    end else begin
      pkt_t p;
      int   t;
      p = pkt_t'(m_axis_ps_tdata);
      t = int'(p.tag);
      batch++;
      if (!sent_pkt.exists(t)) check(1'b0, "ejected packet was sent");
      else begin
        check(p == sent_pkt[t], "ejected packet matches the sent copy");
        check(ecyc >= sent_icyc[t] + HOP * hops(p.src, p.dst) + 2 * int'(p.len),
              "ejection not earlier than the shortest latency");
        if (t == 0) exact_ecyc = ecyc;
        sent_pkt.delete(t);
        received++;
      end
      if (m_axis_ps_tlast && batch > 1) n_batch_multi++;
    end
    widx = m_axis_ps_tlast ? 0 : widx + 1;
  end

  // ---------------- send side (s_axis_sp) ----------------
  task automatic send_word(input logic [31:0] w, input logic last);
    s_axis_sp_tdata = w; s_axis_sp_tlast = last; s_axis_sp_tvalid = 1'b1;
    @(posedge clk);
    while (!s_axis_sp_tready) @(posedge clk);
    @(negedge clk) s_axis_sp_tvalid = 1'b0;
  endtask

  int tag = 0;
  task automatic quantum(input int icyc, input int npk, input int fixed_src);
    send_word(32'(icyc), npk == 0);
    for (int i = 0; i < npk; i++) begin
      pkt_t p;
      int   s, d;
      s = (fixed_src >= 0) ? fixed_src : $urandom_range(0, N - 1);
      do d = $urandom_range(0, N - 1); while (d == s);
      p.src = 8'(s); p.dst = 8'(d); p.len = 4'($urandom_range(1, 5)); p.tag = 12'(tag);
      sent_pkt[tag] = p; sent_icyc[tag] = icyc; tag++; sent++;
      send_word(32'(p), i == npk - 1);
    end
  endtask

  initial begin
    pkt_t p;
    int icyc;
    rst_n = 1'b0; s_axis_sp_tvalid = 1'b0; s_axis_sp_tdata = '0; s_axis_sp_tlast = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // directed packet 0: node 0 -> node 2*13+3, 4 flits, injected at cycle 5, idle NoC
    send_word(32'd5, 1'b0);
    p.src = 8'd0; p.dst = 8'(2 * NX + 3); p.len = 4'd4; p.tag = 12'd0;
    sent_pkt[0] = p; sent_icyc[0] = 5; tag = 1; sent = 1;
    send_word(32'(p), 1'b1);
    send_word(32'd100, 1'b1);
    wait (received == 1);
    // header leaves the PE at cycle 5; flit k reaches the NoC at 5+k and may leave it at
    // 5+k+HOP*hops+1; the NI holds the packet until its 4th flit is in (cycle 5+3+HOP*5+1 ends
    // it) and then streams 4 flits to the PE, whose 1-flit FIFO is filled at the end of the last
    // of them: 5 + HOP*5 + 1 + 3 + 1 + 3 = 23 cycles are complete when the halt takes effect.
    check(exact_ecyc == 5 + HOP * 5 + 1 + 3 + 1 + 3 + 1, "exact latency through an idle NoC");

    // random traffic: 40 quanta of 10 cycles with 0..6 packets each
    icyc = 110;
    for (int q = 0; q < 40; q++) begin
      quantum(icyc, $urandom_range(0, 6), -1);
      icyc += 10;
    end
    // burst from a single source: 9 packets, all of them queued in its injection FIFO
    quantum(icyc, 9, 7);
    icyc += 5;
    rx_slow = 1'b0;
    quantum(icyc, 12, -1);
    // drain: let the NoC run long enough for everything to arrive
    quantum(icyc + 400, 0, -1);
    wait (dut.stop && !dut.halt);
    repeat (20) @(posedge clk);

    check(received == sent, "every sent packet was ejected");
    check(sent_pkt.size() == 0, "no packet lost");
    check(run_cycles == int'(dut.u_halter.cnt_q), "counter equals NoC run cycles");
    check(run_cycles == u_noc.now, "NoC model saw exactly the run cycles");
    check(gclk_pulses == run_cycles, "halting clock pulses equal run cycles");
    check(u_noc.injected == u_noc.delivered, "every injected flit was delivered");
    $display("mechanisms: stop_wait=%0d halt=%0d multi_batch=%0d vc0=%0d vc1=%0d pe_full=%0d rx_stall=%0d",
             n_stop_wait, n_halt, n_batch_multi, n_vc[0], n_vc[1], n_pe_full, n_rx_stall);
    check(n_stop_wait > 0, "mechanism: injector waited for stop");
    check(n_halt > 0, "mechanism: ejection halted the NoC");
    check(n_batch_multi > 0, "mechanism: several packets in one ejection transaction");
    check(n_vc[0] > 0 && n_vc[1] > 0, "mechanism: both VCs used");
    check(n_rx_stall > 0, "mechanism: receiver stalled the ejector");
    $display("packets sent=%0d received=%0d final cycle=%0d", sent, received, run_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (sent=%0d received=%0d cycle=%0d stop=%0b halt=%0b)",
             sent, received, dut.u_halter.cnt_q, dut.stop, dut.halt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
