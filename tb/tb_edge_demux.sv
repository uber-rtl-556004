// tb_edge_demux: self-checking test of the ejection demultiplexor.
// Random cells addressed to the cores of concentrator EDGE_ID must appear on
// exactly the right output one cycle later, with a credit for their virtual
// network in the same cycle.
module tb_edge_demux;
  import uber_pkg::*;
  localparam int unsigned CONC = 4, EDGE_ID = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t in;
  logic  [NUM_VNETS-1:0] credit_out;
  link_t [CONC-1:0] out;
  int checks = 0, failures = 0;

  edge_demux #(.CONC(CONC), .EDGE_ID(EDGE_ID)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    link_t prev;
    int unsigned k;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev = '0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      // outputs for the cell driven in the previous cycle
      for (int c = 0; c < CONC; c++) begin
        bit exp_v;
        exp_v = prev.valid && (int'(prev.body.dst) == EDGE_ID*CONC + c);
        check(out[c].valid == exp_v, $sformatf("valid of core %0d at step %0d", c, i));
        if (exp_v) check(out[c].body == prev.body, "cell contents");
      end
      for (int v = 0; v < NUM_VNETS; v++)
        check(credit_out[v] == (prev.valid && prev.body.vn == vnet_e'(v)), "credit pulse");
      k = $urandom % CONC;
      in.valid      = ($urandom % 4 != 0);
      in.body       = '0;
      in.body.dst   = core_id_t'(EDGE_ID*CONC + k);
      in.body.vn    = vnet_e'($urandom % 2);
      in.body.data  = $urandom;
      in.body.src   = core_id_t'($urandom);
      prev = in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
