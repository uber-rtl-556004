// rr_arbiter: round-robin arbiter used by the allocators of the concentrator
// and the router.
//
// Grants one of N requesters, searching from the requester after the one
// granted last. The grant is combinational from req; the priority pointer moves
// past the winner on the clock edge where `update` is high, so a grant that is
// not used (for example for lack of credits) does not lose its turn.
// Round-robin is this design's choice: the paper fixes strict priority only
// between virtual networks, not the order among equal requesters.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         update,
  output logic [N-1:0] gnt,
  output logic         any
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;   // highest-priority requester
  logic [IW-1:0] win;

  always_comb begin
    gnt = '0;
    win = '0;
    any = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (!any && req[idx]) begin
        any      = 1'b1;
        win      = IW'(idx);
        gnt[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      ptr <= '0;
    else if (update && any)
      ptr <= (int'(win) == N - 1) ? '0 : win + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
