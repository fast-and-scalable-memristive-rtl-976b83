// Testbench of the row processor (8 rows), driven with random control and
// sense-amplifier values each cycle. A per-row model in the testbench (loops
// over rows, no vector arithmetic) predicts the row controller's has_one /
// has_zero flags, the candidate counts and "all else sorted" flags, the
// lowest candidate, and the wordline state after each clock edge (row
// exclusion, emission of the chosen row, reload of a recorded state masked by
// the sorted rows, restart with every unsorted row).
module tb_row_processor;
  import cs_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, cr = 0, active = 0, ren = 0, sel = 0, iter_end = 0, len = 0;
  logic [ROWS-1:0] sa = '0, ld_re = '0, wl;
  logic has_one, has_zero, done_keep, done_excl;
  cnt_t cnt_keep, cnt_excl;
  logic [2:0] pick_idx;
  int checks = 0, failures = 0;
  bit m_wl [ROWS];
  bit m_sorted [ROWS];

  row_processor #(.ROWS(ROWS)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic cnt_t cnt_of(input int n);
    return (n == 0) ? CNT_NONE : (n == 1) ? CNT_ONE : CNT_MANY;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      bit e_one, e_zero, dk, de;
      int nk, ne, lowest;
      bit cand [ROWS];
      @(negedge clk);
      start    = (t % 40 == 0);
      active   = ($urandom_range(0, 7) != 0);
      cr       = active && ($urandom_range(0, 3) != 0);
      sa       = ROWS'($urandom());
      ren      = cr && 1'($urandom_range(0, 1));
      sel      = active && 1'($urandom_range(0, 1));
      iter_end = sel && ($urandom_range(0, 2) == 0);
      len      = iter_end && 1'($urandom_range(0, 1));
      ld_re    = ROWS'($urandom());
      #1;
      e_one = 0; e_zero = 0; nk = 0; ne = 0; dk = 1; de = 1; lowest = -1;
      for (int r = 0; r < ROWS; r++) begin
        if (m_wl[r] && sa[r])  e_one = 1;
        if (m_wl[r] && !sa[r]) e_zero = 1;
        if (m_wl[r]) nk++;
        if (m_wl[r] && !sa[r]) ne++;
        if (!(m_sorted[r] || m_wl[r])) dk = 0;
        if (!(m_sorted[r] || (m_wl[r] && !sa[r]))) de = 0;
        cand[r] = ren ? (m_wl[r] && !sa[r]) : m_wl[r];
      end
      for (int r = ROWS - 1; r >= 0; r--) if (cand[r]) lowest = r;
      chk(has_one == (cr && e_one), "has_one");
      chk(has_zero == (cr && e_zero), "has_zero");
      chk(cnt_keep == cnt_of(nk) && cnt_excl == cnt_of(ne), "counts");
      chk(done_keep == dk && done_excl == de, "done flags");
      if (lowest >= 0) chk(int'(pick_idx) == lowest, "pick");
      // model update
      if (start) begin
        for (int r = 0; r < ROWS; r++) begin m_wl[r] = 1; m_sorted[r] = 0; end
      end else if (active) begin
        if (sel && lowest >= 0) begin
          m_sorted[lowest] = 1;
          cand[lowest] = 0;
        end
        for (int r = 0; r < ROWS; r++)
          m_wl[r] = iter_end ? ((len ? ld_re[r] : 1'b1) && !m_sorted[r]) : cand[r];
      end
      @(posedge clk);
      #1;
      for (int r = 0; r < ROWS; r++) chk(wl[r] == m_wl[r], $sformatf("wl[%0d] at step %0d", r, t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
