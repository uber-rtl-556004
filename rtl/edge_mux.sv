// edge_mux: the concentrator ("edge multiplexor") that joins CONC cores onto
// one injection port of a mesh router.
//
// Each core has its own input queue per virtual network here (input queueing
// at the edges, as the paper's realistic network has). Cells then pass three
// stages, named after the concentrator in the paper's schematic:
//   VA  (virtual-channel allocation) - when the router input queue of a
//       virtual network is not held by a message, a round-robin arbiter hands
//       it to one core whose queue head is the head cell of a message. The
//       core keeps it until its tail cell has gone, so messages never
//       interleave within a virtual network.
//   MA  (multiplexor allocation) - each cycle one of the two held virtual
//       networks whose owner has a cell and that has a router credit sends a
//       cell, virtual network 0 (control) first; the cell leaves its queue.
//   MT  (multiplexor traversal) - the cell crosses the multiplexor into the
//       output register, which drives the one-cycle link to the router.
// A cell that wins MA in cycle t is on `out` in cycle t+2. A message whose
// head cell is at the head of its queue in cycle t wins VA in t and sends its
// head in MA at t+1.
//
// Credits: one credit pulse per popped cell goes back to the core (credit_out),
// and one counter per virtual network, reset to ROUTER_CREDITS (the router's
// input queue depth), tracks space downstream. The stage names follow the
// paper's figure; the paper does not define them, so the meaning given to VA,
// MA and MT above, the round-robin order and the queue depths are this
// design's choices.
module edge_mux
  import uber_pkg::*;
#(
  parameter int unsigned CONC           = 16,
  parameter int unsigned CORE_Q_DEPTH   = 4,
  parameter int unsigned ROUTER_CREDITS = 8
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  link_t [CONC-1:0]                     in,
  output logic  [CONC-1:0][NUM_VNETS-1:0]      credit_out,
  output link_t                                out,
  input  logic  [NUM_VNETS-1:0]                credit_in
);
  localparam int unsigned CW = $clog2(ROUTER_CREDITS + 1);
  localparam int unsigned IW = (CONC > 1) ? $clog2(CONC) : 1;

  cell_t                     q_head  [CONC][NUM_VNETS];
  logic                      q_empty [CONC][NUM_VNETS];
  logic                      q_pop   [CONC][NUM_VNETS];

  logic [NUM_VNETS-1:0]      owned;
  logic [IW-1:0]             owner  [NUM_VNETS];
  logic [CW-1:0]             credit [NUM_VNETS];
  link_t                     ma_reg;

  // ---- input queues -------------------------------------------------------
  for (genvar c = 0; c < CONC; c++) begin : g_core
    for (genvar v = 0; v < NUM_VNETS; v++) begin : g_vn
      cell_fifo #(.DEPTH(CORE_Q_DEPTH)) u_q (
        .clk, .rst_n,
        .wr_en  (in[c].valid && in[c].body.vn == vnet_e'(v)),
        .wr_data(in[c].body),
        .rd_en  (q_pop[c][v]),
        .rd_data(q_head[c][v]),
        .empty  (q_empty[c][v]),
        .full   ()
      );
    end
  end

  // ---- VA -------------------------------------------------------------------
  logic [CONC-1:0] va_req [NUM_VNETS];
  logic [CONC-1:0] va_gnt [NUM_VNETS];
  logic            va_any [NUM_VNETS];
  logic [IW-1:0]   va_win [NUM_VNETS];

  for (genvar v = 0; v < NUM_VNETS; v++) begin : g_va
    always_comb begin
      va_win[v] = '0;
      for (int c = 0; c < CONC; c++) begin
        va_req[v][c] = !owned[v] && !q_empty[c][v] && q_head[c][v].head;
        if (va_gnt[v][c]) va_win[v] = IW'(c);
      end
    end
    rr_arbiter #(.N(CONC)) u_va_arb (
      .clk, .rst_n, .req(va_req[v]), .update(1'b1), .gnt(va_gnt[v]), .any(va_any[v])
    );
  end

  // ---- MA -------------------------------------------------------------------
  logic [NUM_VNETS-1:0] ma_ok;
  logic                 ma_send;
  vnet_e                ma_vn;
  cell_t                ma_cell;
  always_comb begin
    for (int v = 0; v < NUM_VNETS; v++)
      ma_ok[v] = owned[v] && !q_empty[owner[v]][v] && credit[v] != 0;
    ma_send = |ma_ok;
    ma_vn   = ma_ok[VN_CTRL] ? VN_CTRL : VN_DATA;
    ma_cell = q_head[owner[ma_vn]][ma_vn];
    for (int c = 0; c < CONC; c++)
      for (int v = 0; v < NUM_VNETS; v++)
        q_pop[c][v] = ma_send && ma_vn == vnet_e'(v) && owner[v] == IW'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owned      <= '0;
      ma_reg     <= '0;
      out        <= '0;
      credit_out <= '0;
      for (int v = 0; v < NUM_VNETS; v++) begin
        owner[v]  <= '0;
        credit[v] <= CW'(ROUTER_CREDITS);
      end
    end else begin
      // VA
      for (int v = 0; v < NUM_VNETS; v++)
        if (va_any[v]) begin
          owned[v] <= 1'b1;
          owner[v] <= va_win[v];
        end
      // MA
      ma_reg.valid <= ma_send;
      ma_reg.body  <= ma_cell;
      if (ma_send && ma_cell.tail) owned[ma_vn] <= 1'b0;
      for (int v = 0; v < NUM_VNETS; v++)
        credit[v] <= credit[v] + CW'(credit_in[v]) - CW'(ma_send && ma_vn == vnet_e'(v));
      for (int c = 0; c < CONC; c++)
        for (int v = 0; v < NUM_VNETS; v++)
          credit_out[c][v] <= q_pop[c][v];
      // MT
      out <= ma_reg;
    end
  end

  for (genvar v = 0; v < NUM_VNETS; v++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) int'(credit[v]) <= ROUTER_CREDITS)
      else $error("edge_mux: more credits returned than sent");
  end
endmodule
