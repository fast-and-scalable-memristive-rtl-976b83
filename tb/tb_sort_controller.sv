// Testbench of the sub-sorter's top-level controller. It walks the controller
// through the scheduling cases by hand: start puts it in the column-read phase
// with recording allowed; cen is asked for on every column but the last; on
// the last column a single minimum (iter_end) starts the next iteration, from
// the MSB without a state load or from a recorded column with one (then no
// recording); several minima stall the column processor until iter_end;
// finish ends in the done state.
module tb_sort_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, last = 0, len_sync = 0, iter_end = 0, finish = 0;
  logic cr, active, at_end, cen_req, sen_req, to_msb, busy, done;
  int checks = 0, failures = 0;

  sort_controller dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected {cr, active, at_end, cen_req, sen_req, busy, done}
  task automatic expect_out(input logic [6:0] e, input string what);
    #1;
    chk({cr, active, at_end, cen_req, sen_req, busy, done} == e,
        $sformatf("%s: got %b want %b", what,
                  {cr, active, at_end, cen_req, sen_req, busy, done}, e));
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    rst_n = 1;
    expect_out(7'b0000000, "idle");
    start = 1;
    @(negedge clk);
    start = 0;
    expect_out(7'b1101110, "run, from MSB");
    last = 1;
    expect_out(7'b1110110, "run, last column");
    // single minimum, next iteration loads a record
    iter_end = 1; len_sync = 1;
    #1 chk(!to_msb, "no restart at MSB with a load");
    @(negedge clk);
    iter_end = 0; len_sync = 0; last = 0;
    expect_out(7'b1101010, "run after load: no recording");
    last = 1;
    // several minima: stall
    @(negedge clk);
    last = 0;
    expect_out(7'b0110010, "stall");
    @(negedge clk);
    expect_out(7'b0110010, "still stalled");
    iter_end = 1;
    #1 chk(to_msb, "restart at MSB without a load");
    @(negedge clk);
    iter_end = 0;
    expect_out(7'b1101110, "run from MSB again");
    last = 1; iter_end = 1; finish = 1;
    #1 chk(!to_msb, "no restart after finish");
    @(negedge clk);
    iter_end = 0; finish = 0; last = 0;
    expect_out(7'b0000001, "done");
    @(negedge clk);
    expect_out(7'b0000001, "done holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
