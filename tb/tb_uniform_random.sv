// tb_uniform_random: uniform random traffic through an 8x8 emulator (2 VCs), the synthetic
// workload of the original evaluation: random source/destination pairs, 5-flit packets, a flit
// injection rate of 5% per node and cycle (a packet with probability 1% per node and cycle).
//
// The software side works as the original's does: for every emulated cycle that has packets,
// it sends one quantum with that cycle as injection cycle. The receive side checks every
// arrival against its sent copy and against the shortest possible latency. At the end it
// prints the emulated cycles, the global clock cycles spent and their ratio, i.e. the
// emulator's hardware overhead per emulated cycle (software time is not modelled), and the
// mean and maximum packet latency seen by the software.
module tb_uniform_random;
  import emunoc_pkg::*;
  localparam int NX = 8, NY = 8, N = NX * NY, HOP = 2;
  localparam int CYCLES = 2000;        // emulated cycles with traffic
  localparam int RATE_PPM = 10000;     // packet probability per node and cycle, in 1e-6

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

  emunoc_top #(.NOC_X(NX), .NOC_Y(NY)) dut (.*);

  noc_model #(.NOC_X(NX), .NOC_Y(NY), .NUM_VC(2), .HOP_LAT(HOP)) u_noc (
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

  pkt_t   sent_pkt  [int];
  int     sent_icyc [int];
  int     sent = 0, received = 0;
  longint lat_sum = 0;
  int     lat_max = 0;
  int     gclk = 0;

  always @(posedge clk) if (rst_n) gclk++;
  assign m_axis_ps_tready = 1'b1;

  int widx = 0, ecyc = 0;
  always @(posedge clk) if (rst_n && m_axis_ps_tvalid && m_axis_ps_tready) begin
    if (widx == 0) ecyc = int'(m_axis_ps_tdata);
    else begin
      pkt_t p;
      int   t, lat;
      p = pkt_t'(m_axis_ps_tdata);
      t = int'(p.tag);
      if (!sent_pkt.exists(t)) check(1'b0, "ejected packet was sent");
      else begin
        lat = ecyc - sent_icyc[t];
        check(p == sent_pkt[t], "ejected packet matches the sent copy");
        check(lat >= HOP * hops(p.src, p.dst) + 2 * int'(p.len), "latency not below the minimum");
        lat_sum += lat;
        if (lat > lat_max) lat_max = lat;
        sent_pkt.delete(t);
        received++;
      end
    end
    widx = m_axis_ps_tlast ? 0 : widx + 1;
  end

  task automatic send_word(input logic [31:0] w, input logic last);
    s_axis_sp_tdata = w; s_axis_sp_tlast = last; s_axis_sp_tvalid = 1'b1;
    @(posedge clk);
    while (!s_axis_sp_tready) @(posedge clk);
    @(negedge clk) s_axis_sp_tvalid = 1'b0;
  endtask

  initial begin
    pkt_t q[$];
    int tag = 0;
    rst_n = 1'b0; s_axis_sp_tvalid = 1'b0; s_axis_sp_tdata = '0; s_axis_sp_tlast = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 1; t <= CYCLES; t++) begin
      q.delete();
      for (int s = 0; s < N; s++)
        if ($urandom_range(0, 999999) < RATE_PPM) begin
          pkt_t p;
          int d;
          do d = $urandom_range(0, N - 1); while (d == s);
          p.src = 8'(s); p.dst = 8'(d); p.len = 4'd5; p.tag = 12'(tag % 4096);
          sent_pkt[tag % 4096] = p; sent_icyc[tag % 4096] = t; tag++; sent++;
          q.push_back(p);
        end
      if (q.size() > 0) begin
        send_word(32'(t), 1'b0);
        foreach (q[i]) send_word(32'(q[i]), i == q.size() - 1);
      end
    end
    send_word(32'(CYCLES + 300), 1'b1);
    wait (dut.stop && !dut.halt);
    repeat (20) @(posedge clk);
    check(received == sent, "every packet ejected");
    check(sent > CYCLES * N * RATE_PPM / 1000000 / 2, "offered load near the target rate");
    check(int'(dut.u_halter.cnt_q) == CYCLES + 300, "emulation ran to the last quantum");
    $display("uniform random 8x8, 5%% flit rate: packets=%0d emulated cycles=%0d global cycles=%0d overhead=%0d.%02d",
             sent, CYCLES + 300, gclk, gclk / (CYCLES + 300), (gclk * 100 / (CYCLES + 300)) % 100);
    if (received > 0)
      $display("latency: mean=%0d max=%0d cycles", int'(lat_sum / received), lat_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (sent=%0d received=%0d)", sent, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
