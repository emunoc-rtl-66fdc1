// emunoc_top: hardware side of a hybrid NoC emulator. Software generates packets and sends them,
// one time quantum per stream transaction, into s_axis_sp; the emulated NoC runs exactly up to
// each quantum's injection cycle and is frozen whenever a packet has arrived, so that the
// arrivals, stamped with their ejection cycle, can be streamed back on m_axis_ps.
//
// Contents: the transactor (sp_injector, clock_halter, ps_ejector) and, for every one of the
// NOC_X*NOC_Y nodes, an injection PE + injection NI and an ejection NI + ejection PE. The mesh
// of routers itself is not part of this module: its local ports are brought out as the noc_inj_*
// (flits into each router) and noc_ej_* (flits out of each router) arrays, and the router logic
// must advance only while noc_run is high (or be clocked by halting_clk, its gated-clock twin).
// Node id = y*NOC_X + x indexes all per-node arrays.
//
// Clocking follows the paper's system figure: the injector, the injection PE FIFOs, the
// ejection PE 1-flit FIFOs and the ejector run on the global clock; the PE state machines, the
// NIs and the NoC run on the halting clock, realised here as the clock enable noc_run.
// Reset is synchronous and active low.
module emunoc_top
  import emunoc_pkg::*;
#(
  parameter int unsigned NOC_X          = 13,
  parameter int unsigned NOC_Y          = 13,
  parameter int unsigned NUM_VC         = 2,
  parameter int unsigned MAX_PKT_LEN    = 5,
  parameter int unsigned INJ_FIFO_DEPTH = 16,
  parameter int unsigned CYCLE_W        = 32,
  localparam int unsigned N             = NOC_X * NOC_Y,
  localparam int unsigned VC_W          = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Stream from the DMA (packets to inject)
  input  logic [AXIS_W-1:0]   s_axis_sp_tdata,
  input  logic                s_axis_sp_tvalid,
  output logic                s_axis_sp_tready,
  input  logic                s_axis_sp_tlast,
  // AXI4-Stream to the DMA (ejection cycle + ejected packets)
  output logic [AXIS_W-1:0]   m_axis_ps_tdata,
  output logic                m_axis_ps_tvalid,
  input  logic                m_axis_ps_tready,
  output logic                m_axis_ps_tlast,
  // halting clock for the NoC
  output logic                noc_run,
  output logic                halting_clk,
  // router local input ports
  output logic                noc_inj_valid [N],
  output flit_t               noc_inj_flit  [N],
  output logic [VC_W-1:0]     noc_inj_vc    [N],
  input  logic [NUM_VC-1:0]   noc_inj_ready [N],
  // router local output ports
  input  logic                noc_ej_valid  [N],
  input  flit_t               noc_ej_flit   [N],
  input  logic [VC_W-1:0]     noc_ej_vc     [N],
  output logic [NUM_VC-1:0]   noc_ej_ready  [N]
);
  logic [CYCLE_W-1:0] injection_cycle, ejection_cycle;
  logic               write_enable, stop, halt, run;

  logic [N-1:0] inj_wr, inj_full;
  flit_t        inj_wdata;
  logic [N-1:0] ej_rd_valid, ej_rd_en;
  flit_t        ej_rd_flit [N];

  assign noc_run = run;

  clock_halter #(.CYCLE_W(CYCLE_W)) u_halter (
    .clk, .rst_n,
    .injection_cycle (injection_cycle),
    .write_enable    (write_enable),
    .halt            (halt),
    .stop            (stop),
    .ejection_cycle  (ejection_cycle),
    .ctrl            (run),
    .halting_clk     (halting_clk)
  );

  sp_injector #(.NUM_NODES(N), .CYCLE_W(CYCLE_W)) u_injector (
    .clk, .rst_n,
    .s_axis_tdata    (s_axis_sp_tdata),
    .s_axis_tvalid   (s_axis_sp_tvalid),
    .s_axis_tready   (s_axis_sp_tready),
    .s_axis_tlast    (s_axis_sp_tlast),
    .injection_cycle (injection_cycle),
    .write_enable    (write_enable),
    .stop            (stop),
    .pe_wr           (inj_wr),
    .pe_wdata        (inj_wdata),
    .pe_full         (inj_full)
  );

  for (genvar n = 0; n < N; n++) begin : g_node
    logic  pi_valid, pi_last, pi_ready;
    flit_t pi_flit;
    logic  pe_valid, pe_last, pe_ready;
    flit_t pe_flit;

    inject_pe #(.FIFO_DEPTH(INJ_FIFO_DEPTH)) u_inj_pe (
      .clk, .rst_n, .run,
      .wr_en   (inj_wr[n]),
      .wr_flit (inj_wdata),
      .full    (inj_full[n]),
      .m_valid (pi_valid),
      .m_flit  (pi_flit),
      .m_last  (pi_last),
      .m_ready (pi_ready)
    );

    inject_ni #(.NUM_VC(NUM_VC)) u_inj_ni (
      .clk, .rst_n, .run,
      .s_valid   (pi_valid),
      .s_flit    (pi_flit),
      .s_last    (pi_last),
      .s_ready   (pi_ready),
      .out_valid (noc_inj_valid[n]),
      .out_flit  (noc_inj_flit[n]),
      .out_vc    (noc_inj_vc[n]),
      .out_ready (noc_inj_ready[n])
    );

    eject_ni #(.NUM_VC(NUM_VC), .MAX_PKT_LEN(MAX_PKT_LEN)) u_ej_ni (
      .clk, .rst_n, .run,
      .in_valid (noc_ej_valid[n]),
      .in_flit  (noc_ej_flit[n]),
      .in_vc    (noc_ej_vc[n]),
      .in_ready (noc_ej_ready[n]),
      .m_valid  (pe_valid),
      .m_flit   (pe_flit),
      .m_last   (pe_last),
      .m_ready  (pe_ready)
    );

    eject_pe u_ej_pe (
      .clk, .rst_n, .run,
      .s_valid  (pe_valid),
      .s_flit   (pe_flit),
      .s_last   (pe_last),
      .s_ready  (pe_ready),
      .rd_valid (ej_rd_valid[n]),
      .rd_flit  (ej_rd_flit[n]),
      .rd_en    (ej_rd_en[n])
    );
  end

  ps_ejector #(.NUM_NODES(N), .CYCLE_W(CYCLE_W)) u_ejector (
    .clk, .rst_n,
    .rd_valid       (ej_rd_valid),
    .rd_flit        (ej_rd_flit),
    .rd_en          (ej_rd_en),
    .halt           (halt),
    .ejection_cycle (ejection_cycle),
    .m_axis_tdata   (m_axis_ps_tdata),
    .m_axis_tvalid  (m_axis_ps_tvalid),
    .m_axis_tready  (m_axis_ps_tready),
    .m_axis_tlast   (m_axis_ps_tlast)
  );
endmodule
