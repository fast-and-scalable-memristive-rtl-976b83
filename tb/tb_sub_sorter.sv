// Testbench of one sub-sorter (32 rows of 10 bits, K = 2) working alone. The
// testbench closes the loop a multi-bank manager would close, for a single
// bank, with its own few lines: ren when the column has both a 1 and a 0,
// recording when ren and the bank allows it, selection of the bank whenever it
// has a minimum row, iteration end when at most one is left, load when the
// table holds a record. Several random data sets (with and without repeated
// values) are sorted; outputs are compared with a stable sort and the cycle
// count with the reference model.
module tb_sub_sorter;
  import cs_pkg::*;
  import sort_ref_pkg::*;
  localparam int ROWS = 32, W = 10, K = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          prog_en = 0, start = 0;
  logic [4:0]    prog_row = '0;
  logic [W-1:0]  prog_data = '0;
  en_local_t     en_local;
  logic          at_end, done_keep, done_excl, busy, done;
  cnt_t          cnt_keep, cnt_excl, cnt;
  logic [4:0]    pick_idx;
  logic [W-1:0]  pick_val;
  en_sync_t      en_sync;
  logic          sel, iter_end, finish;
  int checks = 0, failures = 0;

  sub_sorter #(.ROWS(ROWS), .W(W), .K(K)) dut (.*);

  // single-bank loop closure
  always_comb begin
    en_sync.ren = en_local.has_one && en_local.has_zero;
    en_sync.sen = en_sync.ren && en_local.sen;
    en_sync.cen = en_local.cen;
    cnt         = en_sync.ren ? cnt_excl : cnt_keep;
    sel         = at_end && (cnt != CNT_NONE);
    iter_end    = at_end && (cnt != CNT_MANY);
    finish      = iter_end && (en_sync.ren ? done_excl : done_keep);
    en_sync.len = iter_end && !finish && (en_local.len || en_sync.sen);
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned vals[];
    int order[$];
    ref_stats_t st;
    vals = new[ROWS];
    @(negedge clk);
    rst_n = 1;
    for (int set = 0; set < 6; set++) begin
      int cyc, k;
      foreach (vals[i])
        vals[i] = (set % 2) ? $urandom_range(0, 12) * 61 : $urandom_range(0, (1 << W) - 1);
      st = ref_run(vals, W, K, order);
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        prog_en = 1; prog_row = 5'(r); prog_data = W'(vals[r]);
      end
      @(negedge clk);
      prog_en = 0; start = 1;
      @(negedge clk);
      start = 0; cyc = 0; k = 0;
      while (!done) begin
        if (sel) begin
          chk(k < ROWS && int'(pick_idx) == order[k] && longint'(pick_val) == vals[order[k]],
              $sformatf("set %0d output %0d: row %0d", set, k, pick_idx));
          k++;
        end
        cyc++;
        @(negedge clk);
      end
      chk(k == ROWS, $sformatf("set %0d: %0d outputs", set, k));
      chk(cyc == st.cycles, $sformatf("set %0d: %0d cycles, reference %0d", set, cyc, st.cycles));
      chk(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
