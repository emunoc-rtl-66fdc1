// inject_pe: injection processing element of one node.
//
// A FIFO of header flits is written by the injector on the global clock (also while the NoC
// is halted). An FSM clocked by the halting clock (here: enabled by run) takes the packet at
// the FIFO head and sends it to its injection NI as one flit-wide AXI4-Stream transaction: the
// header flit, then len-1 dummy payload flits, m_last on the final flit. The header is popped
// when the last flit is accepted. A flit moves when m_valid, m_ready and run are all high.
// The split into FIFO and FSM and the dummy payloads follow the paper; the FIFO depth and the
// payload contents are this design's choices.
module inject_pe
  import emunoc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  run,
  // from the injector (global clock)
  input  logic  wr_en,
  input  flit_t wr_flit,
  output logic  full,
  // to the injection NI
  output logic  m_valid,
  output flit_t m_flit,
  output logic  m_last,
  input  logic  m_ready
);
  flit_t      head;
  logic       empty;
  logic       pop;
  logic [3:0] idx;
  pkt_t       hpkt;
  logic       xfer;

  sync_fifo #(.T(flit_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en (wr_en), .wdata(wr_flit),
    .rd_en (pop),   .rdata(head),
    .full  (full),  .empty(empty), .count()
  );

  assign hpkt    = iconv(head);
  assign m_valid = !empty;
  assign m_flit  = (idx == 4'd0) ? head : payload_flit(hpkt, idx);
  assign m_last  = (hpkt.len <= 4'd1) || (idx == hpkt.len - 4'd1);
  assign xfer    = run && m_valid && m_ready;
  assign pop     = xfer && m_last;

  always_ff @(posedge clk) begin
    if (!rst_n)    idx <= '0;
    else if (xfer) idx <= m_last ? 4'd0 : idx + 4'd1;
  end
endmodule
