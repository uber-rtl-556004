// tb_mesh_router: self-checking test of one mesh router.
// The router sits at (1,1) of a 4x4 mesh with one core per port, so a
// destination id is the index y*4+x of the destination router. Five sender
// models feed all inputs under the router's credits; five receiver models take
// the outputs and return credits with random delay, with a blackout phase.
// Checks: each cell leaves by the XY output for its destination; cells of an
// input virtual channel keep their order; messages never interleave within an
// output virtual network; no downstream queue is over-filled; a control
// message overtakes a data message on a shared output; an idle router puts a
// head cell on its output 5 cycles after it arrives (RC, VA, SA, ST, link).
module tb_mesh_router;
  import uber_pkg::*;
  localparam int unsigned MX = 4, MY = 4, RX = 1, RY = 1, BD = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t [NUM_PORTS-1:0]                in_link, out_link;
  logic  [NUM_PORTS-1:0][NUM_VNETS-1:0] credit_out, credit_in;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  mesh_router #(.MESH_X(MX), .MESH_Y(MY), .X(RX), .Y(RY), .CONC(1), .BUF_DEPTH(BD)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // independent XY reference
  function automatic int xy_port(int dst);
    int dx, dy;
    dx = dst % MX; dy = dst / MX;
    if (dx > RX) return 1;   // east
    if (dx < RX) return 2;   // west
    if (dy > RY) return 3;   // north
    if (dy < RY) return 4;   // south
    return 0;                // local
  endfunction

  cell_t tosend  [NUM_PORTS][NUM_VNETS][$];
  cell_t expect_q[NUM_PORTS][NUM_VNETS][$];
  int    scred   [NUM_PORTS][NUM_VNETS];
  int    in_cycle[NUM_PORTS][NUM_VNETS][$];

  task automatic add_msg(int p, msg_type_e t, int dst);
    cell_t x;
    int n;
    n = int'(cells_of(t));
    for (int k = 0; k < n; k++) begin
      x = '0;
      x.head = (k == 0); x.tail = (k == n - 1);
      x.vn = vnet_of(t); x.mtype = t; x.src = core_id_t'(p); x.dst = core_id_t'(dst);
      x.data = $urandom;
      tosend[p][x.vn].push_back(x);
      expect_q[p][x.vn].push_back(x);
    end
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      in_link <= '0;
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VNETS; v++) scred[p][v] = BD;
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        int sel;
        for (int v = 0; v < NUM_VNETS; v++) scred[p][v] += credit_out[p][v];
        sel = -1;
        for (int v = NUM_VNETS - 1; v >= 0; v--)
          if (tosend[p][v].size() > 0 && scred[p][v] > 0) sel = v;
        if (sel >= 0) begin
          in_link[p].valid <= 1;
          in_link[p].body  <= tosend[p][sel].pop_front();
          scred[p][sel]--;
          in_cycle[p][sel].push_back(cycle);
        end else in_link[p].valid <= 0;
      end
    end
  end

  int occupancy[NUM_PORTS][NUM_VNETS];
  int open_src [NUM_PORTS][NUM_VNETS];
  bit withhold = 0;
  int overtakes = 0, stalls = 0, lat_first = -1;
  always @(posedge clk) begin
    if (!rst_n) begin
      credit_in <= '0;
      for (int o = 0; o < NUM_PORTS; o++)
        for (int v = 0; v < NUM_VNETS; v++) begin occupancy[o][v] = 0; open_src[o][v] = -1; end
    end else begin
      for (int o = 0; o < NUM_PORTS; o++) begin
        for (int v = 0; v < NUM_VNETS; v++) begin
          if (!withhold && occupancy[o][v] > 0 && ($urandom % 2 == 0)) begin
            credit_in[o][v] <= 1; occupancy[o][v]--;
          end else credit_in[o][v] <= 0;
          if (occupancy[o][v] == BD) stalls++;
        end
        if (out_link[o].valid) begin
          cell_t x;
          int s, v;
          x = out_link[o].body; s = int'(x.src); v = int'(x.vn);
          occupancy[o][v]++;
          check(occupancy[o][v] <= BD, "downstream queue over-filled");
          check(xy_port(int'(x.dst)) == o, $sformatf("cell for %0d left by port %0d", x.dst, o));
          check(expect_q[s][v].size() > 0, "unexpected cell");
          if (expect_q[s][v].size() > 0) begin
            check(x == expect_q[s][v][0], $sformatf("cell order input %0d vn %0d", s, v));
            void'(expect_q[s][v].pop_front());
          end
          if (x.head) begin
            check(open_src[o][v] == -1, "message starts inside another");
            // sampled one edge after the cycle it was valid in
            if (lat_first < 0) lat_first = cycle - in_cycle[s][v][0] - 1;
          end else check(open_src[o][v] == s, "cells of two messages interleave");
          open_src[o][v] = x.tail ? -1 : s;
          if (v == VN_CTRL && open_src[o][VN_DATA] != -1) overtakes++;
          void'(in_cycle[s][v].pop_front());
        end
      end
    end
  end

  function automatic int left();
    int n = 0;
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VNETS; v++) n += expect_q[p][v].size();
    return n;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1) latency through an idle router: west input to the east neighbour
    add_msg(2, MSG_REQ, 1*MX + 2);
    repeat (15) @(negedge clk);
    check(lat_first == 5, $sformatf("head latency %0d, expected 5", lat_first));
    // 2) a block from the local port to the north, then a request from the
    //    south input to the north: the request overtakes
    add_msg(0, MSG_RESP, 3*MX + 1);
    repeat (6) @(negedge clk);
    add_msg(4, MSG_FWD, 2*MX + 1);
    repeat (50) @(negedge clk);
    check(overtakes > 0, "control message overtakes a data message");
    // 3) random traffic to all destinations with a credit blackout
    for (int i = 0; i < 150; i++)
      add_msg($urandom % NUM_PORTS, ($urandom % 3 == 0) ? MSG_RESP : MSG_REQ, $urandom % (MX*MY));
    repeat (100) @(negedge clk);
    withhold = 1;
    repeat (40) @(negedge clk);
    withhold = 0;
    while (left() > 0) @(negedge clk);
    check(stalls > 0, "downstream backpressure stalled an output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d cells left", left());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
