// edge_demux: the ejection demultiplexor of a concentrator.
//
// Every cell leaving the local port of a mesh router belongs to one of the
// CONC cores attached to that router; this block steers it to that core by
// its destination id (core index = dst - EDGE_ID*CONC) through one register
// stage, so a cell on `in` in cycle t is on out[core] in cycle t+1. It has no
// queue: as the paper notes, nothing contends between an edge and its cores,
// and a core's reassembly logic accepts a cell every cycle. Each received
// cell is therefore credited back to the router in the next cycle
// (credit_out), which lets the router use the same credit scheme on its local
// output as on its mesh outputs. The immediate credit return is this design's
// choice.
module edge_demux
  import uber_pkg::*;
#(
  parameter int unsigned CONC    = 16,
  parameter int unsigned EDGE_ID = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  link_t                        in,
  output logic  [NUM_VNETS-1:0]        credit_out,
  output link_t [CONC-1:0]             out
);

  int unsigned local_idx;
  assign local_idx = int'(in.body.dst) - EDGE_ID * CONC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out        <= '0;
      credit_out <= '0;
    end else begin
      for (int c = 0; c < CONC; c++) begin
        out[c].valid <= in.valid && local_idx == c;
        out[c].body  <= in.body;
      end
      for (int v = 0; v < NUM_VNETS; v++)
        credit_out[v] <= in.valid && in.body.vn == vnet_e'(v);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in.valid |-> local_idx < CONC)
    else $error("edge_demux: cell for a core of another concentrator");
endmodule
