// inject_ni: injection network interface between an injection PE and the local input port of
// its router.
//
// The PE delivers one packet per AXI4-Stream transaction. When a header flit is waiting, a
// round-robin arbiter picks one of the virtual channels whose router buffer can take a flit
// (out_ready); the packet keeps that VC until its last flit, and the arbiter pointer moves on,
// so consecutive packets are spread over the VCs. Flits pass straight through (no buffering):
// out_valid/out_flit/out_vc go to the router, and a flit moves when out_valid, the ready of its
// VC and run are high. Round-robin VC assignment per packet follows the paper; the per-VC ready
// handshake towards the router is this design's choice.
module inject_ni
  import emunoc_pkg::*;
#(
  parameter int unsigned NUM_VC = 2,
  localparam int unsigned VC_W  = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // from the injection PE
  input  logic              s_valid,
  input  flit_t             s_flit,
  input  logic              s_last,
  output logic              s_ready,
  // to the router's local port
  output logic              out_valid,
  output flit_t             out_flit,
  output logic [VC_W-1:0]   out_vc,
  input  logic [NUM_VC-1:0] out_ready
);
  logic              busy;       // inside a packet
  logic [VC_W-1:0]   vc_q;
  logic [NUM_VC-1:0] req;
  logic [NUM_VC-1:0] grant;
  logic              any;
  logic [VC_W-1:0]   gvc;
  logic              xfer;

  assign req = busy ? '0 : out_ready;

  rr_arbiter #(.N(NUM_VC)) u_arb (
    .clk, .rst_n,
    .req    (req),
    .update (xfer && !busy),
    .grant  (grant),
    .any    (any)
  );

  always_comb begin
    gvc = '0;
    for (int unsigned v = 0; v < NUM_VC; v++)
      if (grant[v]) gvc = VC_W'(v);
  end

  assign out_vc    = busy ? vc_q : gvc;
  assign out_flit  = s_flit;
  assign out_valid = s_valid && (busy || any);
  assign s_ready   = busy ? out_ready[vc_q] : any;
  assign xfer      = run && s_valid && s_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      vc_q <= '0;
    end else if (xfer) begin
      if (!busy) vc_q <= gvc;
      busy <= !s_last;
    end
  end

  a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid && !busy) |-> is_head(s_flit));
endmodule
