// sync_fifo: single-clock first-in first-out buffer used by the PEs and the ejection NI.
//
// Storage is a register array of DEPTH entries of type T with separate read and write
// pointers and an occupancy counter. The head entry is visible on rdata while empty is low
// (first-word fall-through); rd_en pops it and wr_en pushes wdata, both at the rising clock
// edge, and both may happen in the same cycle. Writing while full and reading while empty are
// ignored and flagged by assertions. The paper builds its FIFOs from vendor FIFO IP; this is a
// generic replacement with the same behaviour.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  T                           wdata,
  input  logic                       rd_en,
  output T                           rdata,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T                mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic            do_wr, do_rd;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rdata = mem[rptr];

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) rptr <= next_ptr(rptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
