// tb_edge_mux: self-checking test of the concentrator.
// Four cores send random control and data messages under the concentrator's
// credits; the router side returns credits with random delay and withholds
// them for a while. Checks: every cell leaves once, in order per core and
// virtual network; within a virtual network messages never interleave; the
// router queue is never over-filled; a control message overtakes a data
// message already on the way; an idle concentrator passes a head cell
// from its input to its output in 4 cycles (queue write, VA, MA, MT).
module tb_edge_mux;
  import uber_pkg::*;
  localparam int unsigned CONC = 4, CQ = 4, RC = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t [CONC-1:0]                in;
  logic  [CONC-1:0][NUM_VNETS-1:0] credit_out;
  link_t                           out;
  logic  [NUM_VNETS-1:0]           credit_in;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  edge_mux #(.CONC(CONC), .CORE_Q_DEPTH(CQ), .ROUTER_CREDITS(RC)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- sender model per core: per-VN cell queues, control first -------------
  cell_t tosend  [CONC][NUM_VNETS][$];
  cell_t expect_q[CONC][NUM_VNETS][$];
  int    ccred   [CONC][NUM_VNETS];
  int    in_cycle[CONC][NUM_VNETS][$];

  task automatic add_msg(int c, msg_type_e t);
    cell_t x;
    int n;
    n = int'(cells_of(t));
    for (int k = 0; k < n; k++) begin
      x = '0;
      x.head = (k == 0); x.tail = (k == n - 1);
      x.vn = vnet_of(t); x.mtype = t; x.src = core_id_t'(c); x.dst = 8'd77;
      x.data = $urandom;
      tosend[c][x.vn].push_back(x);
      expect_q[c][x.vn].push_back(x);
    end
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < CONC; c++) begin
        in[c] <= '0;
        for (int v = 0; v < NUM_VNETS; v++) ccred[c][v] = CQ;
      end
    end else begin
      for (int c = 0; c < CONC; c++) begin
        int sel;
        for (int v = 0; v < NUM_VNETS; v++) ccred[c][v] += credit_out[c][v];
        sel = -1;
        for (int v = NUM_VNETS - 1; v >= 0; v--)
          if (tosend[c][v].size() > 0 && ccred[c][v] > 0) sel = v;
        if (sel >= 0) begin
          in[c].valid <= 1;
          in[c].body  <= tosend[c][sel].pop_front();
          ccred[c][sel]--;
          in_cycle[c][sel].push_back(cycle);
        end else in[c].valid <= 0;
      end
    end
  end

  // ---- router-side model -----------------------------------------------------
  int  occupancy [NUM_VNETS];
  bit  withhold = 0;
  int  open_src  [NUM_VNETS];
  int  overtakes = 0, stalls = 0;
  int  lat_first = -1;
  always @(posedge clk) begin
    if (!rst_n) begin
      credit_in <= '0;
      for (int v = 0; v < NUM_VNETS; v++) begin occupancy[v] = 0; open_src[v] = -1; end
    end else begin
      for (int v = 0; v < NUM_VNETS; v++) begin
        if (!withhold && occupancy[v] > 0 && ($urandom % 3 != 0)) begin
          credit_in[v] <= 1; occupancy[v]--;
        end else credit_in[v] <= 0;
        if (occupancy[v] == RC) stalls++;
      end
      if (out.valid) begin
        cell_t x;
        int s, v;
        x = out.body; s = int'(x.src); v = int'(x.vn);
        occupancy[v]++;
        check(occupancy[v] <= RC, "router queue over-filled");
        check(expect_q[s][v].size() > 0, "unexpected cell");
        if (expect_q[s][v].size() > 0) begin
          check(x == expect_q[s][v][0], $sformatf("cell order core %0d vn %0d", s, v));
          void'(expect_q[s][v].pop_front());
        end
        if (x.head) begin
          check(open_src[v] == -1, "message starts inside another");
          // out is sampled one edge after the cycle it was valid in
          if (lat_first < 0) lat_first = cycle - in_cycle[s][v][0] - 1;
        end else check(open_src[v] == s, "cells of two messages interleave");
        open_src[v] = x.tail ? -1 : s;
        if (v == VN_CTRL && open_src[VN_DATA] != -1) overtakes++;
        void'(in_cycle[s][v].pop_front());
      end
    end
  end

  function automatic int left();
    int n = 0;
    for (int c = 0; c < CONC; c++)
      for (int v = 0; v < NUM_VNETS; v++) n += expect_q[c][v].size();
    return n;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1) latency through an idle concentrator
    add_msg(2, MSG_REQ);
    repeat (12) @(negedge clk);
    check(lat_first == 4, $sformatf("head latency %0d, expected 4", lat_first));
    // 2) overtaking: a block from core 0, then a request from core 3
    add_msg(0, MSG_RESP);
    repeat (4) @(negedge clk);
    add_msg(3, MSG_FWD);
    repeat (40) @(negedge clk);
    check(overtakes > 0, "control message overtakes a data message");
    // 3) random load with a credit blackout
    for (int i = 0; i < 60; i++)
      add_msg($urandom % CONC, ($urandom % 3 == 0) ? MSG_RESP : (($urandom % 2) ? MSG_REQ : MSG_FWD));
    repeat (50) @(negedge clk);
    withhold = 1;
    repeat (30) @(negedge clk);
    withhold = 0;
    while (left() > 0) @(negedge clk);
    check(stalls > 0, "router backpressure stalled the concentrator");
    repeat (5) @(negedge clk);
    check(left() == 0, "all cells delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d cells left", left());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
