// tb_cell_fifo: self-checking test of the cell queue.
// Random writes and reads (never writing a full or reading an empty queue,
// as the credit protocol guarantees) are compared against a queue model; the
// flags are checked every cycle, and the queue is filled to exactly DEPTH.
module tb_cell_fifo;
  import uber_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  wr_en, rd_en, empty, full;
  cell_t wr_data, rd_data;
  int checks = 0, failures = 0;
  cell_t model[$];

  cell_fifo #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic cell_t rnd_cell();
    cell_t c;
    c = '0;
    c.data = $urandom;
    c.dst  = core_id_t'($urandom);
    c.head = 1'($urandom);
    return c;
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full, "empty after reset");
    // fill completely
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1; wr_data = rnd_cell(); model.push_back(wr_data);
      @(negedge clk);
    end
    wr_en = 0;
    check(full && !empty, "full after DEPTH writes");
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      wr_en = (model.size() < DEPTH || rd_en) && ($urandom % 3 != 0);
      rd_en = (model.size() > 0) && ($urandom % 2 == 0);
      wr_en = wr_en && (model.size() < DEPTH || rd_en);
      wr_data = rnd_cell();
      if (rd_en) check(rd_data == model[0], $sformatf("head data at step %0d", i));
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
      @(negedge clk);
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
    end
    wr_en = 0; rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
