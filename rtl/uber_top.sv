// uber_top: the Uber network-on-chip for MESH_X*MESH_Y*CONC cores.
//
// Default: a 4x4 mesh (16 ports) carrying 256 cores, 16 cores concentrated
// onto every mesh port. Each core has an injection interface (ni_tx) that
// cuts its messages into 4-byte cells, and a reassembly interface (ni_rx).
// Cores are numbered so that core c sits on concentrator e = c / CONC, whose
// router is at x = e % MESH_X, y = e / MESH_X. A concentrator (edge_mux) feeds
// its router's local input; the router's local output goes through the
// ejection demultiplexor (edge_demux) back to the cores. Routers are joined by
// one-cycle links in both directions, east/west along x and north/south along
// y, each link carrying one cell per cycle and a credit wire per virtual
// network in the opposite direction.
//
// Path of a cell with no contention: core interface output register, one
// cycle into the concentrator queue, VA/MA/MT in the concentrator, then per
// router RC/VA/SA/ST plus a one-cycle link, then the demultiplexor register
// and reassembly. The cores, caches and directories that produce and consume
// the messages are outside this module: their message ports are the ports of
// uber_top. Following the paper: mesh size, concentration, 4-byte cells,
// virtual networks, stage sequence and credit backpressure. This design's
// own choices: queue depths, core numbering and the message port protocol.
module uber_top
  import uber_pkg::*;
#(
  parameter int unsigned MESH_X       = 4,
  parameter int unsigned MESH_Y       = 4,
  parameter int unsigned CONC         = 16,
  parameter int unsigned CORE_Q_DEPTH = 4,
  parameter int unsigned BUF_DEPTH    = 8,
  localparam int unsigned NR          = MESH_X * MESH_Y,
  localparam int unsigned NCORES      = NR * CONC
) (
  input  logic  clk,
  input  logic  rst_n,
  // message ports of the cores
  input  logic  tx_valid [NCORES],
  output logic  tx_ready [NCORES],
  input  msg_t  tx_msg   [NCORES],
  output logic  rx_valid [NCORES],
  output msg_t  rx_msg   [NCORES]
);
  // core <-> concentrator
  link_t [NCORES-1:0]                  core_out;
  logic  [NCORES-1:0][NUM_VNETS-1:0]   core_credit;
  link_t [NCORES-1:0]                  core_in;

  // router ports
  link_t [NR-1:0][NUM_PORTS-1:0]                 r_in, r_out;
  logic  [NR-1:0][NUM_PORTS-1:0][NUM_VNETS-1:0]  r_cin, r_cout;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    ni_tx #(.CORE_ID(core_id_t'(c)), .CREDITS(CORE_Q_DEPTH)) u_tx (
      .clk, .rst_n,
      .msg_valid(tx_valid[c]), .msg_ready(tx_ready[c]), .msg(tx_msg[c]),
      .out(core_out[c]), .credit_in(core_credit[c])
    );
    ni_rx u_rx (
      .clk, .rst_n, .in(core_in[c]), .rx_valid(rx_valid[c]), .rx_msg(rx_msg[c])
    );
  end

  for (genvar r = 0; r < NR; r++) begin : g_node
    localparam int unsigned X = r % MESH_X;
    localparam int unsigned Y = r / MESH_X;

    edge_mux #(.CONC(CONC), .CORE_Q_DEPTH(CORE_Q_DEPTH), .ROUTER_CREDITS(BUF_DEPTH)) u_mux (
      .clk, .rst_n,
      .in        (core_out[r*CONC +: CONC]),
      .credit_out(core_credit[r*CONC +: CONC]),
      .out       (r_in[r][P_LOCAL]),
      .credit_in (r_cout[r][P_LOCAL])
    );

    edge_demux #(.CONC(CONC), .EDGE_ID(r)) u_demux (
      .clk, .rst_n,
      .in        (r_out[r][P_LOCAL]),
      .credit_out(r_cin[r][P_LOCAL]),
      .out       (core_in[r*CONC +: CONC])
    );

    mesh_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .X(X), .Y(Y),
                  .CONC(CONC), .BUF_DEPTH(BUF_DEPTH)) u_router (
      .clk, .rst_n,
      .in_link(r_in[r]), .credit_out(r_cout[r]),
      .out_link(r_out[r]), .credit_in(r_cin[r])
    );

    // east neighbour (x+1) / west neighbour (x-1)
    if (X + 1 < MESH_X) begin : g_e
      assign r_in[r][P_EAST]  = r_out[r+1][P_WEST];
      assign r_cin[r][P_EAST] = r_cout[r+1][P_WEST];
    end else begin : g_e_edge
      assign r_in[r][P_EAST]  = '0;
      assign r_cin[r][P_EAST] = '0;
    end
    if (X > 0) begin : g_w
      assign r_in[r][P_WEST]  = r_out[r-1][P_EAST];
      assign r_cin[r][P_WEST] = r_cout[r-1][P_EAST];
    end else begin : g_w_edge
      assign r_in[r][P_WEST]  = '0;
      assign r_cin[r][P_WEST] = '0;
    end
    // north neighbour (y+1) / south neighbour (y-1)
    if (Y + 1 < MESH_Y) begin : g_n
      assign r_in[r][P_NORTH]  = r_out[r+MESH_X][P_SOUTH];
      assign r_cin[r][P_NORTH] = r_cout[r+MESH_X][P_SOUTH];
    end else begin : g_n_edge
      assign r_in[r][P_NORTH]  = '0;
      assign r_cin[r][P_NORTH] = '0;
    end
    if (Y > 0) begin : g_s
      assign r_in[r][P_SOUTH]  = r_out[r-MESH_X][P_NORTH];
      assign r_cin[r][P_SOUTH] = r_cout[r-MESH_X][P_NORTH];
    end else begin : g_s_edge
      assign r_in[r][P_SOUTH]  = '0;
      assign r_cin[r][P_SOUTH] = '0;
    end
  end
endmodule
