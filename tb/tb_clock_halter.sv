// tb_clock_halter: self-checking test of the clock halter.
// Writes injection cycles, counts the cycles in which ctrl (the NoC clock enable) is high and
// the pulses of halting_clk, and checks them against the quantum length; pulses halt in the
// middle of a quantum and checks that the counter freezes and the quantum is extended by
// exactly the halted cycles; checks stop and ejection_cycle against a reference counter.
module tb_clock_halter;
  logic        clk = 1'b0;
  logic        rst_n;
  logic [31:0] injection_cycle;
  logic        write_enable, halt;
  logic        stop, ctrl, halting_clk;
  logic [31:0] ejection_cycle;
  int checks = 0, failures = 0;
  int ref_cnt = 0;
  int gclk_pulses = 0;

  clock_halter dut (.*);

  always #5 clk = ~clk;
  always @(posedge halting_clk) gclk_pulses++;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  // run one quantum up to icyc, optionally halting for hlen cycles after hstart run cycles
  task automatic quantum(input int icyc, input int hstart, input int hlen);
    int runs, cycles, pulses0, hcnt, start;
    @(negedge clk);
    injection_cycle = icyc;
    write_enable    = 1'b1;
    @(negedge clk);
    write_enable = 1'b0;
    runs = 0; cycles = 0; pulses0 = gclk_pulses; hcnt = 0; start = ref_cnt;
    while (!stop && cycles < 1000) begin
      halt = (runs == hstart) && (hcnt < hlen);
      if (halt) hcnt++;
      #1;
      if (halt) check(ctrl == 1'b0, "ctrl low while halted");
      if (ctrl) begin
        runs++;
        ref_cnt++;
      end
      @(negedge clk);
      cycles++;
      check(ejection_cycle == 32'(ref_cnt), "ejection_cycle follows the run cycles");
    end
    halt = 1'b0;
    check(stop == 1'b1, "stop reached");
    check(ejection_cycle == 32'(icyc), "counter equals injection cycle at stop");
    check(ctrl == 1'b0, "ctrl low at stop");
    check(gclk_pulses - pulses0 == runs, "halting_clk pulses equal run cycles");
    check(cycles == (icyc - start) + hlen, "quantum length including halt");
  endtask

  initial begin
    rst_n = 1'b0; injection_cycle = '0; write_enable = 1'b0; halt = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(stop == 1'b1 && ctrl == 1'b0, "stopped after reset");
    quantum(10, 0, 0);
    quantum(25, 4, 6);
    quantum(25, 0, 0);          // empty quantum: stays stopped
    quantum(40, 2, 1);
    // a halt while stopped must not change anything
    @(negedge clk) halt = 1'b1;
    @(negedge clk) halt = 1'b0;
    check(ejection_cycle == 32'd40, "counter unchanged by halt while stopped");
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
