// noc_model: behavioural stand-in for the emulated mesh NoC, for simulation only (not
// synthesizable: it uses queues). It connects to the router local ports that emunoc_top brings
// out, and it only advances while run (the clock halter's enable) is high.
//
// Every flit entering at node s is stamped with the model's cycle count and queued per source.
// The head flit of a source queue may leave at its destination once HOP_LAT cycles per mesh
// hop (Manhattan distance) plus one have passed. Each destination takes at most one flit per
// cycle and stays with one source from the header to the tail (wormhole order), choosing the
// next source in round-robin order; the VC of a flit is kept. A flit is offered to a
// destination only when that VC has room (ej_ready). Per-source queues hold QD flits; inj_ready
// is low for all VCs of a full queue. This is not the paper's router; it only gives the
// transactor something with a plausible latency to talk to.
module noc_model
  import emunoc_pkg::*;
#(
  parameter int unsigned NOC_X   = 13,
  parameter int unsigned NOC_Y   = 13,
  parameter int unsigned NUM_VC  = 2,
  parameter int unsigned HOP_LAT = 2,
  parameter int unsigned QD      = 8,
  localparam int unsigned N      = NOC_X * NOC_Y,
  localparam int unsigned VC_W   = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              inj_valid [N],
  input  flit_t             inj_flit  [N],
  input  logic [VC_W-1:0]   inj_vc    [N],
  output logic [NUM_VC-1:0] inj_ready [N],
  output logic              ej_valid  [N],
  output flit_t             ej_flit   [N],
  output logic [VC_W-1:0]   ej_vc     [N],
  input  logic [NUM_VC-1:0] ej_ready  [N]
);
  flit_t           q_f  [N][$];
  int              q_t  [N][$];
  logic [VC_W-1:0] q_vc [N][$];
  logic            locked   [N];
  int              lock_src [N];
  int              rr       [N];
  int              sel      [N];
  int              now;
  longint          delivered, injected;

  function automatic int hops(int s, int d);
    int sx, sy, dx, dy;
    sx = s % NOC_X; sy = s / NOC_X; dx = d % NOC_X; dy = d / NOC_X;
    return ((sx > dx) ? sx - dx : dx - sx) + ((sy > dy) ? sy - dy : dy - sy);
  endfunction

  function automatic logic eligible(int s, int d);
    pkt_t h;
    if (q_f[s].size() == 0) return 1'b0;
    if (!ej_ready[d][q_vc[s][0]]) return 1'b0;
    if (now < q_t[s][0] + int'(HOP_LAT) * hops(s, d) + 1) return 1'b0;
    h = iconv(q_f[s][0]);
    return 32'(h.dst) == 32'(d) || !is_head(q_f[s][0]);
  endfunction

  // destination selection, settled between clock edges
  always @(negedge clk) begin
    for (int d = 0; d < int'(N); d++) begin
      sel[d] = -1;
      if (rst_n) begin
        if (locked[d]) begin
          if (eligible(lock_src[d], d)) sel[d] = lock_src[d];
        end else begin
          for (int k = 0; k < int'(N) && sel[d] < 0; k++) begin
            int s;
            s = (rr[d] + k) % int'(N);
            if (q_f[s].size() > 0 && is_head(q_f[s][0]) && eligible(s, d)) sel[d] = s;
          end
        end
      end
      ej_valid[d] = sel[d] >= 0;
      ej_flit[d]  = (sel[d] >= 0) ? q_f[sel[d]][0] : '0;
      ej_vc[d]    = (sel[d] >= 0) ? q_vc[sel[d]][0] : '0;
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      now = 0; delivered = 0; injected = 0;
      for (int i = 0; i < int'(N); i++) begin
        q_f[i].delete(); q_t[i].delete(); q_vc[i].delete();
        locked[i] = 1'b0; lock_src[i] = 0; rr[i] = 0; inj_ready[i] <= '1;
      end
    end else if (run) begin
      for (int d = 0; d < int'(N); d++) begin
        if (ej_valid[d] && ej_ready[d][ej_vc[d]]) begin
          int s;
          s = sel[d];
          if (ej_flit[d].ftype == FLIT_HEAD) begin locked[d] = 1'b1; lock_src[d] = s; end
          if (ej_flit[d].ftype == FLIT_TAIL || ej_flit[d].ftype == FLIT_HEADTAIL) begin
            locked[d] = 1'b0;
            rr[d] = (s + 1) % int'(N);
          end
          void'(q_f[s].pop_front()); void'(q_t[s].pop_front()); void'(q_vc[s].pop_front());
          delivered++;
        end
      end
      for (int s = 0; s < int'(N); s++) begin
        if (inj_valid[s] && inj_ready[s][inj_vc[s]]) begin
          q_f[s].push_back(inj_flit[s]); q_t[s].push_back(now); q_vc[s].push_back(inj_vc[s]);
          injected++;
        end
        inj_ready[s] <= (q_f[s].size() < int'(QD)) ? '1 : '0;
      end
      now++;
    end
  end
endmodule
