// tb_uber_top_full: the end-to-end test of tb_uber_top run on the network at
// its default size (4x4 mesh, 16 cores per port, 256 cores), with fewer
// random messages per core. Description of the test:
// Every core sends random requests, forwards and responses to random cores,
// then all cores send to one hot-spot concentrator so that queues fill and
// credits run out. A scoreboard checks that each message arrives once, whole
// and unchanged, at its destination, and that messages of one source and
// virtual network to one destination arrive in order. A lone control message
// sent over six router-to-router hops must arrive 14 + 5*6 = 44 cycles after
// the handshake (core interface 2, concentrator queue write + VA/MA/MT 4,
// 5 per router plus link, demultiplexor 1, second cell 1, reassembly 1).
// The mechanisms of the design are counted and each must occur: message
// fragmentation into 18 and 2 cells, multi-hop XY routes with a turn,
// concentrator VA contention, strict-priority overtaking at router outputs,
// credit stalls at the core interface, the concentrator and the routers, and
// a core whose message is refused (tx_ready low).
module tb_uber_top_full;
  import uber_pkg::*;
  localparam int unsigned MX = 4, MY = 4, CC = 16;   // uber_top defaults
  localparam int unsigned NR = MX * MY, NC = NR * CC;
  localparam int unsigned NMSG = 3;      // random messages per core

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_valid [NC];
  logic tx_ready [NC];
  msg_t tx_msg   [NC];
  logic rx_valid [NC];
  msg_t rx_msg   [NC];

  uber_top dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic msg_t mk(int src, int dst, msg_type_e t);
    msg_t m;
    m = '0;
    m.mtype = t; m.src = core_id_t'(src); m.dst = core_id_t'(dst);
    for (int w = 0; w < int'(cells_of(t)); w++) m.data[WORD_W*w +: WORD_W] = $urandom;
    return m;
  endfunction

  // ---- core models -----------------------------------------------------------
  msg_t txq [NC][$];
  msg_t expected [NC][$];     // per destination, in send order
  int   sent_at [NC][$];
  int   refused = 0, outstanding = 0;
  int   last_latency = -1;

  task automatic post(msg_t m);
    txq[int'(m.src)].push_back(m);
  endtask

  initial begin
    bit hs [NC];
    for (int c = 0; c < NC; c++) begin hs[c] = 0; tx_valid[c] = 0; tx_msg[c] = '0; end
    forever begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        if (hs[c]) void'(txq[c].pop_front());
        tx_valid[c] = txq[c].size() > 0;
        if (tx_valid[c]) tx_msg[c] = txq[c][0];
      end
      #1;
      for (int c = 0; c < NC; c++) begin
        hs[c] = rst_n && tx_valid[c] && tx_ready[c];
        if (rst_n && tx_valid[c] && !tx_ready[c]) refused++;
        if (hs[c]) begin
          expected[int'(tx_msg[c].dst)].push_back(tx_msg[c]);
          sent_at[int'(tx_msg[c].dst)].push_back(cycle);
          outstanding++;
        end
      end
    end
  end

  int delivered = 0, frag_data = 0, frag_ctrl = 0, turns = 0;
  always @(negedge clk) if (rst_n) begin
    for (int d = 0; d < NC; d++) if (rx_valid[d]) begin
      int idx;
      msg_t m;
      m = rx_msg[d];
      idx = -1;
      // the first outstanding message of this source and virtual network
      foreach (expected[d][i])
        if (idx < 0 && expected[d][i].src == m.src && vnet_of(expected[d][i].mtype) == vnet_of(m.mtype))
          idx = i;
      check(idx >= 0, $sformatf("unexpected message at core %0d from %0d", d, m.src));
      if (idx >= 0) begin
        check(m == expected[d][idx], $sformatf("message %0d->%0d contents or order", m.src, d));
        last_latency = cycle - sent_at[d][idx];
        expected[d].delete(idx);
        sent_at[d].delete(idx);
      end
      delivered++; outstanding--;
      if (m.mtype == MSG_RESP) frag_data++; else frag_ctrl++;
      begin
        int sr, dr;
        sr = int'(m.src) / CC; dr = d / CC;
        if (sr % MX != dr % MX && sr / MX != dr / MX) turns++;
      end
    end
  end

  // ---- mechanism counters ----------------------------------------------------
  int va_contention = 0, overtakes = 0, core_stalls = 0, edge_stalls = 0, router_stalls = 0;
  int open_msg [NR][NUM_PORTS][NUM_VNETS];

  for (genvar r = 0; r < NR; r++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      for (int v = 0; v < NUM_VNETS; v++) begin
        if ($countones(dut.g_node[r].u_mux.va_req[v]) > 1) va_contention++;
        if (dut.g_node[r].u_mux.owned[v] && dut.g_node[r].u_mux.credit[v] == 0) edge_stalls++;
        for (int p = 0; p < NUM_PORTS; p++)
          if (dut.g_node[r].u_router.state[p][v] == 2'd2 && !dut.g_node[r].u_router.q_empty[p][v]
              && dut.g_node[r].u_router.credit[dut.g_node[r].u_router.route[p][v]][v] == 0)
            router_stalls++;
      end
      for (int o = 0; o < NUM_PORTS; o++) begin
        link_t l;
        l = dut.r_out[r][o];
        if (l.valid) begin
          if (l.body.vn == VN_CTRL && open_msg[r][o][VN_DATA] == 1) overtakes++;
          open_msg[r][o][l.body.vn] = l.body.tail ? 0 : 1;
        end
      end
    end
  end
  for (genvar c = 0; c < NC; c++) begin : g_cmon
    always @(posedge clk) if (rst_n)
      for (int v = 0; v < NUM_VNETS; v++)
        if (dut.g_core[c].u_tx.busy[v] && dut.g_core[c].u_tx.credit[v] == 0) core_stalls++;
  end

  task automatic drain(int limit);
    int t;
    t = 0;
    while ((outstanding > 0 || pending() > 0) && t < limit) begin @(negedge clk); t++; end
  endtask

  function automatic int pending();
    int n = 0;
    for (int c = 0; c < NC; c++) n += txq[c].size();
    return n;
  endfunction

  initial begin
    foreach (open_msg[r, o, v]) open_msg[r][o][v] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // 1) lone control message across six hops: router 0 -> router NR-1
    post(mk(0, NC - 1, MSG_REQ));
    drain(200);
    check(last_latency == 14 + 5 * ((MX - 1) + (MY - 1)),
          $sformatf("unloaded latency %0d, expected %0d", last_latency, 14 + 5 * ((MX - 1) + (MY - 1))));

    // 2) uniform random traffic
    for (int k = 0; k < NMSG; k++)
      for (int c = 0; c < NC; c++) begin
        int r;
        r = $urandom % 3;
        post(mk(c, $urandom % NC, r == 0 ? MSG_REQ : r == 1 ? MSG_FWD : MSG_RESP));
      end
    drain(200000);

    // 3) hot spot: every core sends to the cores of concentrator 0
    for (int k = 0; k < 2; k++)
      for (int c = 0; c < NC; c++)
        post(mk(c, $urandom % CC, (k % 2) ? MSG_RESP : MSG_REQ));
    drain(200000);

    check(outstanding == 0 && pending() == 0, $sformatf("%0d messages not delivered", outstanding + pending()));
    $display("delivered=%0d data=%0d ctrl=%0d turns=%0d va_contention=%0d overtakes=%0d",
             delivered, frag_data, frag_ctrl, turns, va_contention, overtakes);
    $display("core_stalls=%0d edge_stalls=%0d router_stalls=%0d refused=%0d",
             core_stalls, edge_stalls, router_stalls, refused);
    check(frag_data > 0,     "18-cell responses delivered");
    check(frag_ctrl > 0,     "2-cell control messages delivered");
    check(turns > 0,         "XY routes with a turn");
    check(va_contention > 0, "concentrator VA contention");
    check(overtakes > 0,     "strict-priority overtaking at a router output");
    check(core_stalls > 0,   "credit stall at a core interface");
    check(edge_stalls > 0,   "credit stall at a concentrator");
    check(router_stalls > 0, "credit stall at a router");
    check(refused > 0,       "message refused by a busy core interface");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d messages outstanding", outstanding + pending());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
