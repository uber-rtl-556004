// tb_ni_tx: self-checking test of message fragmentation.
// Checks: a control message becomes 2 cells and a response 18 cells, word 0
// first, with head/tail marks, virtual network, source and destination; the
// first cell appears two cycles after the message is accepted; no more cells
// leave than there are credits; a control message overtakes a response that
// is being sent; a second message of a busy virtual network waits.
module tb_ni_tx;
  import uber_pkg::*;
  localparam int unsigned CREDITS = 4;
  localparam core_id_t    ME = 8'd5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  msg_valid, msg_ready;
  msg_t  msg;
  link_t out;
  logic [NUM_VNETS-1:0] credit_in;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  ni_tx #(.CORE_ID(ME), .CREDITS(CREDITS)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic msg_t mk(msg_type_e t, core_id_t d);
    msg_t m;
    m.mtype = t; m.src = ME; m.dst = d;
    for (int w = 0; w < DATA_CELLS; w++)
      m.data[WORD_W*w +: WORD_W] = (w < int'(cells_of(t))) ? $urandom : '0;
    return m;
  endfunction

  // Credits: the consumer pops each cell 'lag' cycles after it arrives,
  // unless credits are held back.
  bit hold_credits = 0;
  int pending [NUM_VNETS];
  always @(posedge clk) begin
    for (int v = 0; v < NUM_VNETS; v++) begin
      if (!hold_credits && pending[v] > 0) begin credit_in[v] <= 1; pending[v]--; end
      else credit_in[v] <= 0;
    end
    if (out.valid) pending[out.body.vn]++;
  end

  cell_t got[$];
  int    got_cycle[$];
  always @(negedge clk) if (rst_n && out.valid) begin
    got.push_back(out.body); got_cycle.push_back(cycle);
  end

  task automatic send(msg_t m, output int acc_cycle);
    // the handshake completes at a rising edge, ending the cycle acc_cycle
    @(negedge clk);
    msg = m; msg_valid = 1;
    #1;
    while (!msg_ready) @(negedge clk);
    acc_cycle = cycle;
    @(negedge clk);
    msg_valid = 0;
  endtask

  task automatic expect_msg(msg_t m, int from);
    // checks the cells of m among got[] starting at 'from', in order
    int n, k;
    n = int'(cells_of(m.mtype));
    k = 0;
    for (int i = from; i < got.size() && k < n; i++) begin
      if (got[i].vn != vnet_of(m.mtype)) continue;
      check(got[i].data == m.data[WORD_W*k +: WORD_W], $sformatf("word %0d", k));
      check(got[i].head == (k == 0) && got[i].tail == (k == n - 1), "head/tail marks");
      check(got[i].dst == m.dst && got[i].src == ME && got[i].mtype == m.mtype, "header fields");
      k++;
    end
    check(k == n, $sformatf("cell count %0d of %0d", k, n));
  endtask

  initial begin
    msg_t m1, m2, m3;
    int t_acc;
    msg_valid = 0; msg = '0; credit_in = '0;
    pending[0] = 0; pending[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1) control message: 2 cells, first one two cycles after acceptance
    m1 = mk(MSG_REQ, 8'd17);
    send(m1, t_acc);
    repeat (6) @(posedge clk);
    check(got.size() == 2, "control message is 2 cells");
    if (got.size() > 0) check(got_cycle[0] == t_acc + 2, $sformatf("first cell latency %0d", got_cycle[0] - t_acc));
    expect_msg(m1, 0);

    // 2) response with credits withheld: exactly CREDITS cells leave
    got.delete(); got_cycle.delete();
    hold_credits = 1;
    m2 = mk(MSG_RESP, 8'd200);
    send(m2, t_acc);
    repeat (30) @(posedge clk);
    check(got.size() == CREDITS, $sformatf("credit stall: %0d cells sent with %0d credits", got.size(), CREDITS));

    // 3) a forward arrives while the response is stalled; give credits back:
    //    the forward's cells leave before the rest of the response
    m3 = mk(MSG_FWD, 8'd3);
    send(m3, t_acc);
    hold_credits = 0;
    repeat (60) @(posedge clk);
    check(got.size() == DATA_CELLS + CTRL_CELLS, "all cells of response and forward");
    if (got.size() > CREDITS + 1)
      check(got[CREDITS].vn == VN_CTRL && got[CREDITS+1].vn == VN_CTRL,
            "control cells overtake the stalled response");
    expect_msg(m2, 0);
    expect_msg(m3, 0);

    // 4) a second response waits while the first is being sent
    got.delete(); got_cycle.delete();
    send(mk(MSG_RESP, 8'd1), t_acc);
    msg = mk(MSG_RESP, 8'd2); msg_valid = 1;
    #1;
    check(!msg_ready, "busy virtual network refuses a new message");
    msg = mk(MSG_REQ, 8'd2);
    #1;
    check(msg_ready, "the other virtual network still accepts");
    msg_valid = 0;
    repeat (40) @(posedge clk);

    // 5) both networks have credits: a forward accepted right after a response
    //    goes out before the response is finished
    got.delete(); got_cycle.delete();
    m2 = mk(MSG_RESP, 8'd44);
    send(m2, t_acc);
    m3 = mk(MSG_REQ, 8'd45);
    send(m3, t_acc);
    repeat (40) @(posedge clk);
    check(got.size() == DATA_CELLS + CTRL_CELLS, "cells of response and request");
    begin
      int first_ctrl;
      first_ctrl = -1;
      foreach (got[i]) if (first_ctrl < 0 && got[i].vn == VN_CTRL) first_ctrl = i;
      check(first_ctrl >= 0 && first_ctrl < 4,
            $sformatf("request starts after %0d response cells", first_ctrl));
    end
    expect_msg(m2, 0);
    expect_msg(m3, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
