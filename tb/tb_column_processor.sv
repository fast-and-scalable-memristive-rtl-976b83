// Testbench of the column processor (8 columns): after reset and after to_msb
// the MSB column is selected; each cen steps one column towards the LSB and
// 'last' rises on column 0; len loads a recorded column state; to_msb wins
// over len and len over cen; with no control the state holds. Expected states
// are kept as column numbers in the testbench.
module tb_column_processor;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic to_msb = 0, cen = 0, len = 0;
  logic [W-1:0] ld_col = '0, col;
  logic last;
  int checks = 0, failures = 0;
  int exp_c;

  column_processor #(.W(W)) dut (.*);

  task automatic expect_col(input int c, input string what);
    checks += 2;
    if (col !== (W'(1) << c)) begin
      failures++;
      $display("FAIL: %s: col %b want column %0d", what, col, c);
    end
    if (last !== (c == 0)) begin
      failures++;
      $display("FAIL: %s: last %b", what, last);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    expect_col(W - 1, "reset");
    rst_n = 1;
    exp_c = W - 1;
    cen = 1;
    repeat (W - 1) begin
      @(negedge clk);
      exp_c--;
      expect_col(exp_c, "step");
    end
    cen = 0;
    @(negedge clk);
    expect_col(0, "hold");
    len = 1; ld_col = W'(1) << 5;
    @(negedge clk);
    len = 0;
    expect_col(5, "load");
    cen = 1; len = 1; ld_col = W'(1) << 2;
    @(negedge clk);
    expect_col(2, "load over cen");
    to_msb = 1;
    @(negedge clk);
    expect_col(W - 1, "to_msb over len");
    to_msb = 0; len = 0;
    repeat (3) @(negedge clk);
    expect_col(W - 4, "three steps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
