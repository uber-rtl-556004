// mesh_router: five-port, dimension-ordered mesh router with the conventional
// four-stage pipeline RC, VA, SA, ST.
//
// Ports are local (0), east (+x), west (-x), north (+y) and south (-y). Every
// input has one FIFO per virtual network (an input virtual channel); every
// output has one output virtual channel per virtual network, i.e. the input
// FIFO of that network in the next router. Stages:
//   RC  route computation: a head cell at the front of an input FIFO gets its
//       output port by XY routing - first along x, then along y, then local.
//   VA  virtual-channel allocation: per output and virtual network a round-
//       robin arbiter gives the output channel to one waiting input channel,
//       which keeps it until its tail cell has passed SA.
//   SA  switch allocation: each input offers one active channel that has a
//       cell and a downstream credit, control network first; each output then
//       grants one input, control-network requests before data-network ones
//       (strict priority), round-robin within a network. The winner leaves
//       its FIFO and a credit goes back upstream in the next cycle.
//   ST  switch traversal into the output register, which drives the link.
// A head cell written into an input FIFO in cycle t does RC in t+1, VA in
// t+2, SA in t+3, ST in t+4 and is on out_link in t+5 (the one-cycle link);
// following cells of the message stream one per cycle.
//
// Credits: one counter per output and virtual network, reset to BUF_DEPTH, the
// depth of the downstream FIFO. Outputs at the mesh boundary are never
// selected by XY routing and receive no credits.
// Following the paper: dimension-ordered routing, input FIFOs, the RC/VA/SA/ST
// stage sequence, separate strictly prioritized virtual networks and credit
// backpressure. This design's own choices: the buffer depth, the separable
// input-first switch allocator and the round-robin order.
module mesh_router
  import uber_pkg::*;
#(
  parameter int unsigned MESH_X    = 4,
  parameter int unsigned MESH_Y    = 4,
  parameter int unsigned X         = 0,
  parameter int unsigned Y         = 0,
  parameter int unsigned CONC      = 16,
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  link_t [NUM_PORTS-1:0]                   in_link,
  output logic  [NUM_PORTS-1:0][NUM_VNETS-1:0]    credit_out,
  output link_t [NUM_PORTS-1:0]                   out_link,
  input  logic  [NUM_PORTS-1:0][NUM_VNETS-1:0]    credit_in
);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  typedef enum logic [1:0] {IVC_IDLE, IVC_VA, IVC_ACTIVE} ivc_state_e;

  // ---- RC: XY routing -------------------------------------------------------
  function automatic port_e route_xy(core_id_t dst);
    int unsigned port, dx, dy;
    port = int'(dst) / CONC;
    dx   = port % MESH_X;
    dy   = port / MESH_X;
    if (dx > X)      return P_EAST;
    else if (dx < X) return P_WEST;
    else if (dy > Y) return P_NORTH;
    else if (dy < Y) return P_SOUTH;
    else             return P_LOCAL;
  endfunction

  cell_t       q_head  [NUM_PORTS][NUM_VNETS];
  logic        q_empty [NUM_PORTS][NUM_VNETS];
  logic        q_pop   [NUM_PORTS][NUM_VNETS];
  ivc_state_e  state   [NUM_PORTS][NUM_VNETS];
  port_e       route   [NUM_PORTS][NUM_VNETS];
  logic        ovc_busy[NUM_PORTS][NUM_VNETS];
  logic [CW-1:0] credit[NUM_PORTS][NUM_VNETS];
  link_t [NUM_PORTS-1:0] st_reg;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    for (genvar v = 0; v < NUM_VNETS; v++) begin : g_vn
      cell_fifo #(.DEPTH(BUF_DEPTH)) u_q (
        .clk, .rst_n,
        .wr_en  (in_link[p].valid && in_link[p].body.vn == vnet_e'(v)),
        .wr_data(in_link[p].body),
        .rd_en  (q_pop[p][v]),
        .rd_data(q_head[p][v]),
        .empty  (q_empty[p][v]),
        .full   ()
      );
    end
  end

  // ---- VA ---------------------------------------------------------------------
  logic [NUM_PORTS-1:0] va_req [NUM_PORTS][NUM_VNETS];  // [out][vn] -> inputs
  logic [NUM_PORTS-1:0] va_gnt [NUM_PORTS][NUM_VNETS];
  logic                 va_any [NUM_PORTS][NUM_VNETS];

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_va
    for (genvar v = 0; v < NUM_VNETS; v++) begin : g_vn
      always_comb
        for (int p = 0; p < NUM_PORTS; p++)
          va_req[o][v][p] = !ovc_busy[o][v] && state[p][v] == IVC_VA
                            && route[p][v] == port_e'(o);
      rr_arbiter #(.N(NUM_PORTS)) u_arb (
        .clk, .rst_n, .req(va_req[o][v]), .update(1'b1),
        .gnt(va_gnt[o][v]), .any(va_any[o][v])
      );
    end
  end

  // ---- SA ---------------------------------------------------------------------
  logic  [NUM_PORTS-1:0] sa_in_req;      // input p offers a cell
  vnet_e                 sa_in_vn [NUM_PORTS];
  port_e                 sa_in_out[NUM_PORTS];
  logic [NUM_PORTS-1:0]  sa_req  [NUM_PORTS][NUM_VNETS];  // [out][vn] -> inputs
  logic [NUM_PORTS-1:0]  sa_gnt  [NUM_PORTS][NUM_VNETS];
  logic                  sa_any  [NUM_PORTS][NUM_VNETS];
  logic [NUM_PORTS-1:0]  sa_win  [NUM_PORTS];             // [out] -> input one-hot
  vnet_e                 sa_win_vn[NUM_PORTS];

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      sa_in_req[p] = 1'b0;
      sa_in_vn[p]  = VN_CTRL;
      sa_in_out[p] = P_LOCAL;
      for (int v = NUM_VNETS - 1; v >= 0; v--) begin
        if (state[p][v] == IVC_ACTIVE && !q_empty[p][v] && credit[route[p][v]][v] != 0) begin
          sa_in_req[p] = 1'b1;
          sa_in_vn[p]  = vnet_e'(v);
          sa_in_out[p] = route[p][v];
        end
      end
    end
    for (int o = 0; o < NUM_PORTS; o++)
      for (int v = 0; v < NUM_VNETS; v++)
        for (int p = 0; p < NUM_PORTS; p++)
          sa_req[o][v][p] = sa_in_req[p] && sa_in_out[p] == port_e'(o)
                            && sa_in_vn[p] == vnet_e'(v);
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_sa
    // Strict priority: the data network's arbiter only moves when no control
    // cell competes for this output.
    logic upd_data;
    assign upd_data = !sa_any[o][VN_CTRL];
    rr_arbiter #(.N(NUM_PORTS)) u_arb_ctrl (
      .clk, .rst_n, .req(sa_req[o][VN_CTRL]), .update(1'b1),
      .gnt(sa_gnt[o][VN_CTRL]), .any(sa_any[o][VN_CTRL])
    );
    rr_arbiter #(.N(NUM_PORTS)) u_arb_data (
      .clk, .rst_n, .req(sa_req[o][VN_DATA]), .update(upd_data),
      .gnt(sa_gnt[o][VN_DATA]), .any(sa_any[o][VN_DATA])
    );
    always_comb begin
      sa_win_vn[o] = sa_any[o][VN_CTRL] ? VN_CTRL : VN_DATA;
      sa_win[o]    = sa_any[o][VN_CTRL] ? sa_gnt[o][VN_CTRL] : sa_gnt[o][VN_DATA];
    end
  end

  always_comb
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VNETS; v++)
        q_pop[p][v] = sa_in_req[p] && sa_in_vn[p] == vnet_e'(v)
                      && sa_win[sa_in_out[p]][p] && sa_win_vn[sa_in_out[p]] == vnet_e'(v);

  // ---- state, ST and credits ------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_reg     <= '0;
      out_link   <= '0;
      credit_out <= '0;
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VNETS; v++) begin
          state[p][v]    <= IVC_IDLE;
          route[p][v]    <= P_LOCAL;
          ovc_busy[p][v] <= 1'b0;
          credit[p][v]   <= CW'(BUF_DEPTH);
        end
    end else begin
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VNETS; v++) begin
          // RC
          if (state[p][v] == IVC_IDLE && !q_empty[p][v] && q_head[p][v].head) begin
            route[p][v] <= route_xy(q_head[p][v].dst);
            state[p][v] <= IVC_VA;
          end
          // VA (indexed by the output this input waits for)
          if (state[p][v] == IVC_VA && va_gnt[route[p][v]][v][p])
            state[p][v] <= IVC_ACTIVE;
          // SA: the tail cell releases both channels
          if (q_pop[p][v] && q_head[p][v].tail)
            state[p][v] <= IVC_IDLE;
          credit_out[p][v] <= q_pop[p][v];
        end
      for (int o = 0; o < NUM_PORTS; o++) begin
        for (int v = 0; v < NUM_VNETS; v++) begin
          if (va_any[o][v]) ovc_busy[o][v] <= 1'b1;
          credit[o][v] <= credit[o][v] + CW'(credit_in[o][v])
                          - CW'(|sa_win[o] && sa_win_vn[o] == vnet_e'(v));
        end
        // ST
        st_reg[o].valid <= |sa_win[o];
        st_reg[o].body  <= '0;
        for (int p = 0; p < NUM_PORTS; p++)
          if (sa_win[o][p]) st_reg[o].body <= q_head[p][sa_win_vn[o]];
      end
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VNETS; v++)
          if (q_pop[p][v] && q_head[p][v].tail) ovc_busy[route[p][v]][v] <= 1'b0;
      out_link <= st_reg;
    end
  end

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_dst_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     in_link[p].valid |-> int'(in_link[p].body.dst) / CONC < MESH_X * MESH_Y)
      else $error("mesh_router: destination outside the mesh");
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_chk
    for (genvar v = 0; v < NUM_VNETS; v++) begin : g_vn
      assert property (@(posedge clk) disable iff (!rst_n) int'(credit[o][v]) <= BUF_DEPTH)
        else $error("mesh_router: more credits returned than sent");
    end
  end
endmodule
