// ni_tx: core-side injection interface; fragments messages into cells.
//
// A core hands over one coherence message at a time (valid/ready). Requests
// and forwards are control messages of 8 bytes (2 cells, virtual network 0);
// responses carry a 72-byte cache block (18 cells, virtual network 1). The
// interface holds one message per virtual network and sends one 4-byte cell
// per cycle to its edge concentrator, word 0 first, marking the first cell
// `head` and the last `tail`. A control message overtakes a block that is
// being sent: each cycle the control network goes first if it has a cell and
// a credit (strict priority between virtual networks, as in the paper).
//
// Credits: one counter per virtual network, reset to CREDITS (the depth of
// this core's queue in the concentrator), decremented per cell sent and
// incremented per pulse on credit_in. Timing: a message accepted in cycle t
// has its first cell on `out` in cycle t+2 at the earliest; cells of one
// message then follow back to back while credits last. Holding one message
// per virtual network and the registered output are this design's choices.
module ni_tx
  import uber_pkg::*;
#(
  parameter core_id_t     CORE_ID = '0,
  parameter int unsigned  CREDITS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the core
  input  logic                  msg_valid,
  output logic                  msg_ready,
  input  msg_t                  msg,
  // to the concentrator
  output link_t                 out,
  input  logic [NUM_VNETS-1:0]  credit_in
);
  localparam int unsigned CW = $clog2(CREDITS + 1);

  logic      [NUM_VNETS-1:0] busy;
  msg_t                      hold   [NUM_VNETS];
  logic [CELL_IDX_W-1:0]     idx    [NUM_VNETS];
  logic [CW-1:0]             credit [NUM_VNETS];

  vnet_e in_vn;
  assign in_vn     = vnet_of(msg.mtype);
  assign msg_ready = !busy[in_vn];

  // Strict priority: control network first.
  logic  send;
  vnet_e sel;
  always_comb begin
    send = 1'b0;
    sel  = VN_CTRL;
    for (int v = NUM_VNETS - 1; v >= 0; v--) begin
      if (busy[v] && credit[v] != 0) begin
        send = 1'b1;
        sel  = vnet_e'(v);
      end
    end
  end

  logic last;
  assign last = (int'(idx[sel]) == int'(cells_of(hold[sel].mtype)) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      out  <= '0;
      for (int v = 0; v < NUM_VNETS; v++) begin
        idx[v]    <= '0;
        credit[v] <= CW'(CREDITS);
        hold[v]   <= '0;
      end
    end else begin
      out.valid <= send;
      if (send) begin
        out.body.head  <= (idx[sel] == 0);
        out.body.tail  <= last;
        out.body.vn    <= sel;
        out.body.mtype <= hold[sel].mtype;
        out.body.src   <= CORE_ID;
        out.body.dst   <= hold[sel].dst;
        out.body.data  <= hold[sel].data[WORD_W*idx[sel] +: WORD_W];
        idx[sel]       <= last ? '0 : idx[sel] + 1'b1;
        if (last) busy[sel] <= 1'b0;
      end
      for (int v = 0; v < NUM_VNETS; v++)
        credit[v] <= credit[v] + CW'(credit_in[v]) - CW'(send && sel == vnet_e'(v));
      if (msg_valid && msg_ready) begin
        busy[in_vn] <= 1'b1;
        hold[in_vn] <= msg;
        idx[in_vn]  <= '0;
      end
    end
  end

  for (genvar v = 0; v < NUM_VNETS; v++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) int'(credit[v]) <= CREDITS)
      else $error("ni_tx: more credits returned than sent");
  end
endmodule
