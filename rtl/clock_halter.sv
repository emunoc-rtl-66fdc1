// clock_halter: stops and restarts the emulated NoC so that it stays cycle-aligned with the
// software that feeds it.
//
// A register holds the injection cycle written by the injector (write_enable). A counter
// counts emulated cycles. ctrl = (counter < injection cycle) && !halt: while ctrl is high the
// emulated logic advances one cycle per global clock and the counter increments; halt from
// the ejector freezes both. stop = (counter == injection cycle) tells the injector that the
// time quantum has been emulated. ejection_cycle is the live counter value, sent with every
// batch of ejected packets. This follows the paper's description of its clock halter.
//
// The paper gates the global clock with a clock buffer. Here halting_clk = clk AND ctrl, with
// ctrl sampled on the falling edge so the gated clock cannot glitch (the behaviour of an FPGA
// BUFGCE); it is meant for an external NoC. Inside this design the same effect is obtained with
// ctrl used as a clock enable on the global clock, which is cycle-for-cycle equivalent and
// avoids gated clocks in simulation. Reset (synchronous, active low) clears counter and
// injection cycle, so the design comes out of reset stopped.
module clock_halter #(
  parameter int unsigned CYCLE_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [CYCLE_W-1:0] injection_cycle,
  input  logic               write_enable,
  input  logic               halt,
  output logic               stop,
  output logic [CYCLE_W-1:0] ejection_cycle,
  output logic               ctrl,
  output logic               halting_clk
);
  logic [CYCLE_W-1:0] icyc_q;
  logic [CYCLE_W-1:0] cnt_q;
  logic               gate_en_n;

  assign ctrl           = (cnt_q < icyc_q) && !halt;
  assign stop           = (cnt_q == icyc_q);
  assign ejection_cycle = cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      icyc_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (write_enable) icyc_q <= injection_cycle;
      if (ctrl)         cnt_q  <= cnt_q + CYCLE_W'(1);
    end
  end

  // glitch-free clock gate: enable changes only while the clock is low
  always_ff @(negedge clk) begin
    if (!rst_n) gate_en_n <= 1'b0;
    else        gate_en_n <= ctrl;
  end
  assign halting_clk = clk & gate_en_n;

  // injection cycles must not lie in the past, or the counter could never reach them
  a_icyc_monotonic: assert property (@(posedge clk) disable iff (!rst_n)
    write_enable |-> (injection_cycle >= cnt_q));
endmodule
