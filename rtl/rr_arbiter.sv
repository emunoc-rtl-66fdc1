// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot: the first requester at or after the rotating priority pointer (wrapping
// around). The pointer moves to the position after the granted requester when update is high
// at a rising clock edge, so a requester that was just served has the lowest priority next.
// Grant is combinational from req and the pointer; the pointer resets to requester 0. Used by
// the ejector (FIFO read order, Fig. 5 of the paper), the injection NI (VC assignment) and the
// ejection NI (order of completed VCs).
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         update,
  output logic [N-1:0] grant,
  output logic         any
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;
  logic [IW-1:0] gidx;

  always_comb begin
    grant = '0;
    gidx  = '0;
    any   = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % N;
      if (!any && req[i]) begin
        any      = 1'b1;
        grant[i] = 1'b1;
        gidx     = IW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      ptr <= '0;
    else if (update && any)
      ptr <= (gidx == IW'(N - 1)) ? '0 : gidx + IW'(1);
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
