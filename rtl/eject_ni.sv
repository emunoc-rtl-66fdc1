// eject_ni: ejection network interface between the local output port of a router and its
// ejection PE.
//
// There is one FIFO per virtual channel, each MAX_PKT_LEN flits deep so that it can hold a
// whole packet. in_ready[v] is high while FIFO v has room. A comparator per VC marks the VC
// complete when the FIFO count reaches the length carried in the head flit at the FIFO front.
// Complete VCs are served one packet at a time in round-robin order: the packet is streamed to
// the PE as one AXI4-Stream transaction (m_last on its final flit), and the next packet is
// chosen only after that. Transfers happen when run is high. Per-VC packet FIFOs and the
// count/length comparator follow the paper; the arbitration among VCs is this design's choice.
// A length field of 0 is treated as 1.
module eject_ni
  import emunoc_pkg::*;
#(
  parameter int unsigned NUM_VC      = 2,
  parameter int unsigned MAX_PKT_LEN = 5,
  localparam int unsigned VC_W       = (NUM_VC > 1) ? $clog2(NUM_VC) : 1,
  localparam int unsigned CNT_W      = $clog2(MAX_PKT_LEN + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // from the router's local port
  input  logic              in_valid,
  input  flit_t             in_flit,
  input  logic [VC_W-1:0]   in_vc,
  output logic [NUM_VC-1:0] in_ready,
  // to the ejection PE
  output logic              m_valid,
  output flit_t             m_flit,
  output logic              m_last,
  input  logic              m_ready
);
  flit_t             front [NUM_VC];
  logic [CNT_W-1:0]  count [NUM_VC];
  logic [3:0]        need  [NUM_VC];
  logic [NUM_VC-1:0] full, empty, complete, wr, rd;
  logic [NUM_VC-1:0] req, grant;
  logic              any;
  logic              busy;
  logic [VC_W-1:0]   vc_q, sel;
  logic [3:0]        idx;
  logic [3:0]        len_q;
  logic [3:0]        plen;
  logic              xfer;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    pkt_t h;
    sync_fifo #(.T(flit_t), .DEPTH(MAX_PKT_LEN)) u_fifo (
      .clk, .rst_n,
      .wr_en(wr[v]), .wdata(in_flit),
      .rd_en(rd[v]), .rdata(front[v]),
      .full (full[v]), .empty(empty[v]), .count(count[v])
    );
    assign h           = iconv(front[v]);
    assign need[v]     = (h.len == 4'd0) ? 4'd1 : h.len;
    // comparator: FIFO count against the packet length of the head flit
    assign complete[v] = !empty[v] && (32'(count[v]) >= 32'(need[v]));
    assign in_ready[v] = !full[v];
    assign wr[v]       = run && in_valid && (in_vc == VC_W'(v)) && !full[v];
    assign rd[v]       = xfer && (sel == VC_W'(v));
  end

  assign req = busy ? '0 : complete;

  rr_arbiter #(.N(NUM_VC)) u_arb (
    .clk, .rst_n,
    .req    (req),
    .update (xfer && !busy),
    .grant  (grant),
    .any    (any)
  );

  always_comb begin
    sel = vc_q;
    if (!busy)
      for (int unsigned v = 0; v < NUM_VC; v++)
        if (grant[v]) sel = VC_W'(v);
  end

  // packet length is taken from the header when it is sent and held for the payload flits
  assign plen    = busy ? len_q : need[sel];
  assign m_flit  = front[sel];
  assign m_valid = busy || any;
  assign m_last  = (idx == plen - 4'd1);
  assign xfer    = run && m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      vc_q  <= '0;
      idx   <= '0;
      len_q <= '0;
    end else if (xfer) begin
      if (!busy) begin
        vc_q  <= sel;
        len_q <= plen;
      end
      busy <= !m_last;
      idx  <= m_last ? 4'd0 : idx + 4'd1;
    end
  end

  a_in_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (run && in_valid) |-> in_ready[in_vc]);
endmodule
