// eject_pe: ejection processing element of one node.
//
// It accepts the flits of one packet per AXI4-Stream transaction from its ejection NI, keeps
// only the header flit and drops the dummy payload. When the last flit arrives, the header is
// placed into a 1-flit FIFO (a register with a valid bit) that the parallel-to-serial ejector
// reads on the global clock: rd_valid is the FIFO's read-valid, rd_en empties it. The receiving
// side moves only when run is high. While the 1-flit FIFO is full no further flits are accepted
// (the NoC is halted then in any case). Keeping only the head flit in a 1-flit FIFO follows the
// paper; the back-pressure rule is this design's choice.
module eject_pe
  import emunoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  run,
  // from the ejection NI
  input  logic  s_valid,
  input  flit_t s_flit,
  input  logic  s_last,
  output logic  s_ready,
  // 1-flit FIFO towards the ejector (global clock)
  output logic  rd_valid,
  output flit_t rd_flit,
  input  logic  rd_en
);
  flit_t head_q;
  logic  xfer;

  assign s_ready = !rd_valid;
  assign xfer    = run && s_valid && s_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q   <= '0;
      rd_valid <= 1'b0;
      rd_flit  <= '0;
    end else begin
      if (xfer && is_head(s_flit)) head_q <= s_flit;
      if (xfer && s_last) begin
        rd_flit  <= is_head(s_flit) ? s_flit : head_q;
        rd_valid <= 1'b1;
      end else if (rd_en) begin
        rd_valid <= 1'b0;
      end
    end
  end

  a_no_read_empty: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> rd_valid);
endmodule
