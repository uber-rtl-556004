// tb_ni_rx: self-checking test of message reassembly.
// Random messages of both virtual networks are cut into cells; a control
// message is interleaved cell by cell with a response (as strict priority in
// the network produces). Each message must come out whole and once, in the
// order of its tail cells, with the right type, source, destination and words.
module tb_ni_rx;
  import uber_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t in;
  logic  rx_valid;
  msg_t  rx_msg;
  int checks = 0, failures = 0;

  ni_rx dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic msg_t mk(msg_type_e t);
    msg_t m;
    m = '0;
    m.mtype = t; m.src = core_id_t'($urandom); m.dst = 8'd9;
    for (int w = 0; w < int'(cells_of(t)); w++) m.data[WORD_W*w +: WORD_W] = $urandom;
    return m;
  endfunction

  function automatic cell_t cell_of(msg_t m, int k);
    cell_t c;
    c.head = (k == 0); c.tail = (k == int'(cells_of(m.mtype)) - 1);
    c.vn = vnet_of(m.mtype); c.mtype = m.mtype; c.src = m.src; c.dst = m.dst;
    c.data = m.data[WORD_W*k +: WORD_W];
    return c;
  endfunction

  msg_t expected[$];
  int   delivered = 0;

  // compare every delivered message, in completion order
  always @(posedge clk) if (rst_n && rx_valid) begin
    check(expected.size() > 0, "unexpected message");
    if (expected.size() > 0) begin
      check(rx_msg == expected[0], $sformatf("message %0d contents", delivered));
      void'(expected.pop_front());
    end
    delivered++;
  end

  initial begin
    msg_t d, c;
    int kd, kc;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      d = mk(MSG_RESP);
      c = mk(($urandom % 2) ? MSG_REQ : MSG_FWD);
      kd = 0; kc = 0;
      // control starts after a random number of response cells
      while (kd < DATA_CELLS || kc < CTRL_CELLS) begin
        @(negedge clk);
        if (kc < CTRL_CELLS && (kd >= int'($urandom % DATA_CELLS) || kd == DATA_CELLS)) begin
          in.valid = 1; in.body = cell_of(c, kc); kc++;
          if (kc == CTRL_CELLS) expected.push_back(c);
        end else if (kd < DATA_CELLS) begin
          in.valid = 1; in.body = cell_of(d, kd); kd++;
          if (kd == DATA_CELLS) expected.push_back(d);
        end
        if ($urandom % 4 == 0) begin
          // idle cycle: undo and retry later
          in.valid = 0;
          if (in.body.tail) void'(expected.pop_back());
          if (in.body.vn == VN_CTRL) kc--; else kd--;
        end
      end
      @(negedge clk); in.valid = 0;
    end
    repeat (4) @(posedge clk);
    check(delivered == 80, $sformatf("delivered %0d of 80 messages", delivered));
    check(expected.size() == 0, "messages left undelivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
