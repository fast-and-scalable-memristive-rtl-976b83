// Testbench of the memristive bank model: programs random words into a
// 16 x 8 bank, then reads every bit column through the one-hot bitline enable
// and every row through the row-read port, comparing with a copy of the data
// kept in the testbench. With no bitline driven every sense output is 0.
module tb_rram_bank;
  localparam int ROWS = 16;
  localparam int W    = 8;

  logic clk = 0;
  always #5 clk = ~clk;

  logic            prog_en = 0;
  logic [3:0]      prog_row = '0;
  logic [W-1:0]    prog_data = '0;
  logic [W-1:0]    bl_en = '0;
  logic [ROWS-1:0] sa_out;
  logic [3:0]      rd_row = '0;
  logic [W-1:0]    rd_data;
  logic [W-1:0]    shadow [ROWS];
  int checks = 0, failures = 0;

  rram_bank #(.ROWS(ROWS), .W(W)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      shadow[r] = W'($urandom());
      prog_en = 1; prog_row = 4'(r); prog_data = shadow[r];
    end
    @(negedge clk);
    prog_en = 0;
    for (int c = 0; c < W; c++) begin
      bl_en = W'(1) << c;
      #1;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (sa_out[r] !== shadow[r][c]) begin
          failures++;
          $display("FAIL: column %0d row %0d read %b", c, r, sa_out[r]);
        end
      end
    end
    bl_en = '0;
    #1;
    checks++;
    if (sa_out !== '0) failures++;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 4'(r);
      #1;
      checks++;
      if (rd_data !== shadow[r]) begin
        failures++;
        $display("FAIL: row %0d read %h want %h", r, rd_data, shadow[r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
