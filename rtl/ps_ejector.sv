// ps_ejector: parallel-to-serial ejector, a single-clock serializer from the 1-flit FIFOs of
// all ejection PEs to one AXI4-Stream master port (m_axis_ps).
//
// The read-valid flags of the PE FIFOs are OR-reduced into halt, which freezes the emulated NoC
// in the clock halter as soon as any packet has completed. The FSM then sends one transaction:
// first the current ejection cycle, then one packet word (iconv of the stored header flit) per
// waiting FIFO, tlast with the last one. A round-robin arbiter picks which FIFO is sent next;
// the multiplexer passes the arbiter's one-hot grant to the FIFO read enables when the word is
// accepted (tready) and all-zero otherwise, and each accepted word advances the arbiter (ctrl).
// When the last FIFO has been read, halt falls and emulation resumes. Everything runs on the
// global clock. The structure (or-reduce, FSM, round-robin arbiter, read-enable multiplexer)
// follows the paper's serializer; the word order within a transaction follows its system
// figure; the tlast placement is this design's choice.
module ps_ejector
  import emunoc_pkg::*;
#(
  parameter int unsigned NUM_NODES = 169,
  parameter int unsigned CYCLE_W   = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // 1-flit FIFOs of the ejection PEs
  input  logic [NUM_NODES-1:0] rd_valid,
  input  flit_t                rd_flit [NUM_NODES],
  output logic [NUM_NODES-1:0] rd_en,
  // clock halter
  output logic                 halt,
  input  logic [CYCLE_W-1:0]   ejection_cycle,
  // AXI4-Stream master (m_axis_ps)
  output logic [AXIS_W-1:0]    m_axis_tdata,
  output logic                 m_axis_tvalid,
  input  logic                 m_axis_tready,
  output logic                 m_axis_tlast
);
  typedef enum logic [1:0] {S_IDLE, S_CYCLE, S_PACKET} state_e;
  state_e state;

  logic [NUM_NODES-1:0] grant;
  logic                 any;
  logic                 ctrl;     // arbiter update
  flit_t                sel_flit;
  logic                 hs;

  assign halt = |rd_valid;        // or reduce

  rr_arbiter #(.N(NUM_NODES)) u_arb (
    .clk, .rst_n,
    .req    (rd_valid),
    .update (ctrl),
    .grant  (grant),
    .any    (any)
  );

  always_comb begin
    sel_flit = '0;
    for (int unsigned i = 0; i < NUM_NODES; i++)
      if (grant[i]) sel_flit = rd_flit[i];
  end

  assign m_axis_tvalid = (state == S_CYCLE) || (state == S_PACKET && any);
  assign m_axis_tdata  = (state == S_CYCLE) ? AXIS_W'(ejection_cycle) : AXIS_W'(iconv(sel_flit));
  assign m_axis_tlast  = (state == S_PACKET) && ((rd_valid & ~grant) == '0);
  assign hs            = m_axis_tvalid && m_axis_tready;
  assign ctrl          = hs && (state == S_PACKET);
  assign rd_en         = ctrl ? grant : '0;      // multiplexer: grant or "00...0"

  always_ff @(posedge clk) begin
    if (!rst_n) state <= S_IDLE;
    else begin
      unique case (state)
        S_IDLE:   if (halt) state <= S_CYCLE;
        S_CYCLE:  if (hs) state <= S_PACKET;
        S_PACKET: if (hs && m_axis_tlast) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  a_axis_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axis_tvalid && !m_axis_tready) |=> m_axis_tvalid && $stable(m_axis_tdata));
endmodule
