// ni_rx: core-side ejection interface; reassembles cells into messages.
//
// Cells reach a core one per cycle from its concentrator's demultiplexor. The
// routers and the concentrator hand a virtual network's output to one message
// at a time, from its head cell to its tail cell, so the cells of each virtual
// network arrive contiguous and in order. Reassembly therefore needs one
// buffer per virtual network: the head cell clears it and records source and
// message type, each cell writes its word, and the tail cell completes the
// message, which is presented on rx_msg with rx_valid high for one cycle, the
// cycle after the tail cell arrived. Words past the end of a control message
// are zero.
//
// The paper reassembles messages at the destination core and says there is
// no contention from edges to cores; the core is therefore assumed to take
// every delivered message (no ready signal) - this design's choice.
module ni_rx
  import uber_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  link_t in,
  output logic  rx_valid,
  output msg_t  rx_msg
);
  logic [MSG_W-1:0]      buffer [NUM_VNETS];
  logic [CELL_IDX_W-1:0] idx    [NUM_VNETS];
  logic [NUM_VNETS-1:0]  open_msg;   // a head cell has arrived, tail not yet
  core_id_t              src    [NUM_VNETS];

  vnet_e vn;
  assign vn = in.body.vn;

  logic [MSG_W-1:0] merged;
  logic [CELL_IDX_W-1:0] widx;
  always_comb begin
    widx   = in.body.head ? '0 : idx[vn];
    merged = in.body.head ? '0 : buffer[vn];
    merged[WORD_W*widx +: WORD_W] = in.body.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_valid <= 1'b0;
      rx_msg   <= '0;
      open_msg <= '0;
      for (int v = 0; v < NUM_VNETS; v++) begin
        buffer[v] <= '0;
        idx[v]    <= '0;
        src[v]    <= '0;
      end
    end else begin
      rx_valid <= 1'b0;
      if (in.valid) begin
        buffer[vn] <= merged;
        idx[vn]    <= widx + 1'b1;
        if (in.body.head) src[vn] <= in.body.src;
        open_msg[vn] <= !in.body.tail;
        if (in.body.tail) begin
          rx_valid      <= 1'b1;
          rx_msg.mtype  <= in.body.mtype;
          rx_msg.src    <= in.body.head ? in.body.src : src[vn];
          rx_msg.dst    <= in.body.dst;
          rx_msg.data   <= merged;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in.valid |-> (in.body.head != open_msg[in.body.vn]))
    else $error("ni_rx: cells of a virtual network out of message order");
endmodule
