// tb_uber_load: the network under the load measured for the evaluated
// miniature system: 64 cores on a 4-port (2x2) mesh, 16 cores per port, an
// average of 0.24 cells per cycle entering each port, and one control message
// for every two cache blocks (2:1 blocks to control messages, mean 12.7 cells
// per message). Each core creates messages at random times to random
// destinations. Checks: every message arrives intact; none arrives sooner
// than the uncontended pipeline allows (14 + 5*H cycles for a control
// message, 30 + 5*H for a block, from creation); the offered load per port is
// within 20% of 0.24 cells/cycle. Prints the mean end-to-end delay and the
// mean queueing delay (end delay minus the uncontended latency).
// A second phase offers the same mean load in bursts: a core that fires
// creates one control message and two blocks at once (38 cells), the kind of
// spike seen in the benchmark load; its queueing is reported beside the
// first phase's.
module tb_uber_load;
  import uber_pkg::*;
  localparam int unsigned MX = 2, MY = 2, CC = 16;
  localparam int unsigned NR = MX * MY, NC = NR * CC;
  localparam int unsigned CYCLES = 20000;
  // per-core message probability per cycle, in 1/2^20 units:
  // 0.24 cells/cycle/port / 16 cores / (38/3 cells per message)
  localparam int unsigned P_MSG = 1242;   // 0.001184 * 2^20

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_valid [NC];
  logic tx_ready [NC];
  msg_t tx_msg   [NC];
  logic rx_valid [NC];
  msg_t rx_msg   [NC];

  uber_top #(.MESH_X(MX), .MESH_Y(MY), .CONC(CC)) dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int hops(int s, int d);
    int sr, dr, dx, dy;
    sr = s / CC; dr = d / CC;
    dx = sr % MX - dr % MX; dy = sr / MX - dr / MX;
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  msg_t txq [NC][$];
  int   born [NC][$];
  msg_t expected [NC][$];
  int   exp_born [NC][$];
  longint cells_offered = 0;
  int   outstanding = 0;
  bit   generating = 0;
  bit   bursty = 0;

  initial begin
    bit hs [NC];
    for (int c = 0; c < NC; c++) begin hs[c] = 0; tx_valid[c] = 0; tx_msg[c] = '0; end
    forever begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        if (hs[c]) begin void'(txq[c].pop_front()); void'(born[c].pop_front()); end
        if (generating && ($urandom % (1 << 20)) < (bursty ? P_MSG / 3 : P_MSG))
         for (int b = 0; b < (bursty ? 3 : 1); b++) begin
          msg_t m;
          int d;
          msg_type_e t;
          d = $urandom % NC;
          if (bursty) t = (b == 0) ? MSG_REQ : MSG_RESP;
          else t = ($urandom % 3 == 0) ? (($urandom % 2) ? MSG_REQ : MSG_FWD) : MSG_RESP;
          m = '0; m.mtype = t; m.src = core_id_t'(c); m.dst = core_id_t'(d);
          for (int w = 0; w < int'(cells_of(t)); w++) m.data[WORD_W*w +: WORD_W] = $urandom;
          txq[c].push_back(m); born[c].push_back(cycle);
          cells_offered += cells_of(t);
        end
        tx_valid[c] = txq[c].size() > 0;
        if (tx_valid[c]) tx_msg[c] = txq[c][0];
      end
      #1;
      for (int c = 0; c < NC; c++) begin
        hs[c] = rst_n && tx_valid[c] && tx_ready[c];
        if (hs[c]) begin
          expected[int'(tx_msg[c].dst)].push_back(tx_msg[c]);
          exp_born[int'(tx_msg[c].dst)].push_back(born[c][0]);
          outstanding++;
        end
      end
    end
  end

  int delivered = 0, too_fast = 0;
  longint sum_delay = 0, sum_queue = 0;
  always @(negedge clk) if (rst_n) begin
    for (int d = 0; d < NC; d++) if (rx_valid[d]) begin
      int idx, delay, bound;
      msg_t m;
      m = rx_msg[d];
      idx = -1;
      foreach (expected[d][i])
        if (idx < 0 && expected[d][i].src == m.src && vnet_of(expected[d][i].mtype) == vnet_of(m.mtype))
          idx = i;
      check(idx >= 0 && m == expected[d][idx], $sformatf("message %0d->%0d", m.src, d));
      if (idx >= 0) begin
        delay = cycle - exp_born[d][idx];
        bound = (m.mtype == MSG_RESP ? 30 : 14) + 5 * hops(int'(m.src), d);
        if (delay < bound) too_fast++;
        sum_delay += delay;
        sum_queue += delay - bound;
        expected[d].delete(idx);
        exp_born[d].delete(idx);
      end
      delivered++; outstanding--;
    end
  end

  task automatic run_phase(bit b, output real load, output real mean_delay, output real mean_queue);
    int d0;
    longint c0, sd0, sq0;
    d0 = delivered; c0 = cells_offered; sd0 = sum_delay; sq0 = sum_queue;
    bursty = b;
    generating = 1;
    repeat (CYCLES) @(negedge clk);
    generating = 0;
    while (outstanding > 0 || pending() > 0) @(negedge clk);
    load       = real'(cells_offered - c0) / CYCLES / NR;
    mean_delay = real'(sum_delay - sd0) / (delivered - d0);
    mean_queue = real'(sum_queue - sq0) / (delivered - d0);
    $display("%s: offered load %.3f cells/cycle/port, %0d messages, mean end delay %.1f cycles, mean queueing %.1f cycles",
             b ? "bursts" : "smooth", load, delivered - d0, mean_delay, mean_queue);
    check(load > 0.24 * 0.8 && load < 0.24 * 1.2, "offered load near 0.24 cells/cycle/port");
    check(delivered - d0 > 500, "enough messages for a measurement");
  endtask

  initial begin
    real l0, e0, q0, l1, e1, q1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_phase(0, l0, e0, q0);
    run_phase(1, l1, e1, q1);
    check(too_fast == 0, $sformatf("%0d messages faster than the pipeline allows", too_fast));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pending();
    int n = 0;
    for (int c = 0; c < NC; c++) n += txq[c].size();
    return n;
  endfunction

  initial begin
    repeat (CYCLES * 6) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d messages outstanding", outstanding);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
