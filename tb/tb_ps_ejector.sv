// tb_ps_ejector: self-checking test of the parallel-to-serial ejector (8 nodes).
// Fills sets of 1-flit FIFOs (stand-ins for the ejection PEs), with random tready on the
// stream, and checks: halt is the OR of the read-valids; each transaction starts with the
// ejection cycle and then carries every waiting header exactly once as a packet word, tlast
// on the last; FIFOs are read only when the word is accepted; the order is round robin
// (ascending node order starting after the node served last); and with tready always high a
// batch of k packets takes exactly k+1 cycles plus one for the FSM to leave idle.
module tb_ps_ejector;
  import emunoc_pkg::*;
  localparam int NN = 8;
  logic          clk = 1'b0;
  logic          rst_n;
  logic [NN-1:0] rd_valid, rd_en;
  flit_t         rd_flit [NN];
  logic          halt;
  logic [31:0]   ejection_cycle;
  logic [31:0]   m_axis_tdata;
  logic          m_axis_tvalid, m_axis_tready, m_axis_tlast;
  int checks = 0, failures = 0;

  ps_ejector #(.NUM_NODES(NN)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  function automatic pkt_t mk(int n, int tag);
    pkt_t p;
    p.src = 8'(n + 16); p.dst = 8'(n); p.len = 4'(1 + n % 5); p.tag = 12'(tag);
    return p;
  endfunction

  logic rand_ready = 1'b1;
  always @(negedge clk) m_axis_tready = rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  // stream monitor
  int   words = 0;        // word index in the current transaction
  int   last_node = -1;   // node served last (round-robin reference)
  int   served[$];
  logic [NN-1:0] pend;    // headers waiting at the start of the batch
  always @(posedge clk) if (rst_n) begin
    check(halt == |rd_valid, "halt is the OR of the read-valids");
    if (m_axis_tvalid && m_axis_tready) begin
      if (words == 0) begin
        check(m_axis_tdata == ejection_cycle, "first word is the ejection cycle");
        check(!m_axis_tlast, "no tlast on the cycle word");
      end else begin
        int n, expn;
        n = -1;
        for (int i = 0; i < NN; i++) if (rd_en[i]) n = i;
        check($onehot(rd_en), "exactly one FIFO read per packet word");
        // expected: first pending node after last_node (wrapping)
        expn = -1;
        for (int k = 1; k <= NN; k++) begin
          int c;
          c = (last_node + k + NN) % NN;
          if (expn < 0 && rd_valid[c]) expn = c;
        end
        check(n == expn, "round-robin order");
        if (n >= 0) begin
          check(m_axis_tdata == 32'(iconv(rd_flit[n])), "packet word is the iconv'd header");
          check(m_axis_tlast == ((rd_valid & ~(NN'(1) << n)) == '0), "tlast on the last header");
          last_node = n;
          served.push_back(n);
        end
      end
      words = m_axis_tlast ? 0 : words + 1;
    end else check(rd_en == '0, "no read without a stream handshake");
  end

  // FIFO stand-ins
  always @(posedge clk) for (int i = 0; i < NN; i++) if (rd_en[i]) rd_valid[i] <= 1'b0;

  task automatic batch(input logic [NN-1:0] which, input int cyc, input int tag0);
    int t0, nb;
    @(negedge clk);
    ejection_cycle = cyc;
    nb = 0;
    for (int i = 0; i < NN; i++) if (which[i]) begin
      rd_flit[i] = conv(mk(i, tag0 + i));
      rd_valid[i] = 1'b1;
      nb++;
    end
    served.delete();
    t0 = $time;
    wait (rd_valid == '0);
    @(negedge clk);
    check(served.size() == nb, "every waiting header sent once");
    if (!rand_ready) check(($time - t0) / 10 == nb + 2, "batch takes k+2 cycles");
    check(!halt, "halt released after the batch");
  endtask

  initial begin
    rst_n = 1'b0; rd_valid = '0; ejection_cycle = '0;
    for (int i = 0; i < NN; i++) rd_flit[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    batch(8'b0000_0001, 17, 0);
    batch(8'b1010_0110, 40, 10);
    batch(8'b1111_1111, 41, 20);
    batch(8'b0100_0001, 90, 30);
    for (int r = 0; r < 10; r++) batch(NN'($urandom_range(1, 255)), 100 + r, 40 + r);
    rand_ready = 1'b0;
    batch(8'b0011_1000, 300, 60);
    batch(8'b0000_0010, 301, 70);
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
