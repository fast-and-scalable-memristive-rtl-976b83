// Testbench of the state-record table with K = 2 entries (8 rows, 4
// columns): records are pushed and loaded back newest first; a third record
// drops the oldest; a record and a load in the same cycle hand the new record
// straight through and leave the table unchanged; clear empties it. The
// expected table is a queue in the testbench.
module tb_state_controller;
  localparam int ROWS = 8, W = 4, K = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, sen = 0, len = 0;
  logic [ROWS-1:0] re_in = '0, top_re;
  logic [W-1:0] col_in = '0, top_col;
  logic nonempty;
  int checks = 0, failures = 0;
  logic [ROWS+W-1:0] model [$];   // {re, col}, newest at index 0

  state_controller #(.ROWS(ROWS), .W(W), .K(K)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(input bit s, input bit l);
    logic [ROWS+W-1:0] want;
    @(negedge clk);
    sen = s; len = l;
    re_in = ROWS'($urandom()); col_in = W'(1) << $urandom_range(0, W - 1);
    #1;
    if (l) begin
      want = s ? {re_in, col_in} : model[0];
      chk({top_re, top_col} == want, "loaded entry");
    end
    if (s && !l) begin
      model.push_front({re_in, col_in});
      if (model.size() > K) void'(model.pop_back());
    end else if (l && !s) void'(model.pop_front());
    @(negedge clk);
    sen = 0; len = 0;
    #1;
    chk(nonempty == (model.size() != 0), "nonempty flag");
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
    chk(!nonempty, "empty after reset");
    op(1, 0); op(1, 0); op(0, 1); op(0, 1);   // push two, pop two
    op(1, 0); op(1, 0); op(1, 0);             // third push drops the oldest
    op(1, 1);                                 // bypass
    op(0, 1); op(0, 1);
    op(1, 0);
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    model.delete();
    chk(!nonempty, "empty after clear");
    for (int i = 0; i < 40; i++) begin
      bit s, l;
      s = 1'($urandom_range(0, 1));
      l = (model.size() != 0 || s) ? 1'($urandom_range(0, 1)) : 1'b0;
      op(s, l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
