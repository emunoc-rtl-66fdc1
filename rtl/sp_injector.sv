// sp_injector: serial-to-parallel injector. Receives packets from software over an AXI4-Stream
// slave port and distributes them to the FIFOs of the injection PEs.
//
// One stream transaction is one time quantum: the first 32-bit word is the injection cycle,
// the following words (if any) are packet words (see emunoc_pkg), tlast on the last word.
// The injection cycle is written to the clock halter, which then lets the NoC run up to it.
// Packet words are accepted only once the clock halter reports stop (the quantum has been
// emulated) and only while the FIFO of the packet's source PE has room; each is converted to
// a header flit (conv) and written into the FIFO selected by the source address. The next
// injection-cycle word is likewise taken only while stop is high. This follows the paper's
// description; the packet word layout, the use of tlast and the back-pressure rules are this
// design's choices. Runs on the global clock, never halted.
module sp_injector
  import emunoc_pkg::*;
#(
  parameter int unsigned NUM_NODES = 169,
  parameter int unsigned CYCLE_W   = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Stream slave (s_axis_sp)
  input  logic [AXIS_W-1:0]    s_axis_tdata,
  input  logic                 s_axis_tvalid,
  output logic                 s_axis_tready,
  input  logic                 s_axis_tlast,
  // clock halter
  output logic [CYCLE_W-1:0]   injection_cycle,
  output logic                 write_enable,
  input  logic                 stop,
  // injection PE FIFOs
  output logic [NUM_NODES-1:0] pe_wr,
  output flit_t                pe_wdata,
  input  logic [NUM_NODES-1:0] pe_full
);
  typedef enum logic {S_CYCLE, S_PACKET} state_e;
  state_e state;

  pkt_t pkt;
  logic src_ok;
  logic hs;

  assign pkt    = pkt_t'(s_axis_tdata);
  assign src_ok = (32'(pkt.src) < NUM_NODES) && !pe_full[pkt.src];

  always_comb begin
    s_axis_tready = 1'b0;
    if (stop) s_axis_tready = (state == S_CYCLE) ? 1'b1 : src_ok;
  end
  assign hs = s_axis_tvalid && s_axis_tready;

  assign injection_cycle = CYCLE_W'(s_axis_tdata);
  assign write_enable    = hs && (state == S_CYCLE);
  assign pe_wdata        = conv(pkt);

  always_comb begin
    pe_wr = '0;
    if (hs && state == S_PACKET) pe_wr[pkt.src] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= S_CYCLE;
    else if (hs) begin
      if (s_axis_tlast) state <= S_CYCLE;
      else              state <= S_PACKET;
    end
  end

  a_axis_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axis_tvalid && !s_axis_tready) |=> s_axis_tvalid && $stable(s_axis_tdata));
  a_src_range: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axis_tvalid && state == S_PACKET) |-> (32'(pkt.src) < NUM_NODES));
endmodule
