// cell_fifo: finite queue buffer holding cells of one virtual network.
//
// The paper's realistic network replaces its infinite queues by finite ones
// with credit backpressure; this is that queue. It is a circular buffer of
// DEPTH cells. A write and a read may happen in the same cycle. The head cell
// is visible on rd_data in the cycle after it was written (no fall-through).
// The sender never writes into a full queue because it holds one credit per
// free slot; an assertion checks this rule, and the read of an empty queue.
// The depth is this design's choice: the paper says buffers are finite but
// gives no size.
module cell_fifo
  import uber_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  cell_t wr_data,
  input  logic  rd_en,
  output cell_t rd_data,
  output logic  empty,
  output logic  full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  cell_t             mem [DEPTH];
  logic [AW-1:0]     rd_ptr, wr_ptr;
  logic [AW:0]       count;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  assign rd_data = mem[rd_ptr];
  assign empty   = (count == 0);
  assign full    = (int'(count) == DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= next_ptr(wr_ptr);
      if (rd_en) rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en))
    else $error("cell_fifo: write into a full queue");
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("cell_fifo: read of an empty queue");
endmodule
