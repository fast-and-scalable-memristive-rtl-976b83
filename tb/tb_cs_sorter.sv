// End-to-end testbench of the column-skipping sorter: a 64-element, 12-bit
// sorter split into four banks of 16 rows (multi-bank manager active) with
// K = 2 records, plus the paper's 3-element, 4-bit example on a single bank.
//
// For each data set the elements are programmed, a sort is started, and every
// output is compared with a stable sort of the data; the cycle count from
// start to the last output is compared with the reference model in
// sort_ref_pkg. The {8, 9, 10} example must take exactly 7 cycles.
// The testbench also counts how often each mechanism happens (state
// recording, state loading, row exclusion, skipped all-0/all-1 column, stall
// for repeated values, repeated values spread across banks, a record dropped
// from a full table, an output from each bank) and fails if one never does.
module tb_cs_sorter;
  import sort_ref_pkg::*;

  localparam int N  = 64;
  localparam int W  = 12;
  localparam int K  = 2;
  localparam int NS = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- main DUT: 4 banks ----------------
  logic                 prog_en = 0, start = 0;
  logic [$clog2(N)-1:0] prog_addr = '0;
  logic [W-1:0]         prog_data = '0;
  logic                 busy, done, out_valid;
  logic [$clog2(N)-1:0] out_idx;
  logic [W-1:0]         out_val;

  cs_sorter #(.N(N), .W(W), .K(K), .NS(NS)) dut (
    .clk, .rst_n, .prog_en, .prog_addr, .prog_data, .start,
    .busy, .done, .out_valid, .out_idx, .out_val
  );

  // ---------------- paper example: {8, 9, 10}, w = 4, k = 2 ----------------
  logic       e_prog_en = 0, e_start = 0;
  logic [1:0] e_prog_addr = '0;
  logic [3:0] e_prog_data = '0;
  logic       e_busy, e_done, e_out_valid;
  logic [1:0] e_out_idx;
  logic [3:0] e_out_val;

  cs_sorter #(.N(3), .W(4), .K(2), .NS(3)) dut_ex (
    .clk, .rst_n, .prog_en(e_prog_en), .prog_addr(e_prog_addr), .prog_data(e_prog_data),
    .start(e_start), .busy(e_busy), .done(e_done), .out_valid(e_out_valid),
    .out_idx(e_out_idx), .out_val(e_out_val)
  );

  // ---------------- mechanism counters ----------------
  int n_record = 0, n_load = 0, n_excl = 0, n_skip = 0, n_stall = 0;
  int n_xbank_rep = 0, n_drop = 0;
  int n_bank_out [N/NS];
  logic [N/NS-1:0] prev_sel;
  logic            prev_valid;
  logic [W-1:0]    prev_val;

  initial foreach (n_bank_out[b]) n_bank_out[b] = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_mgr.en_sync.sen) n_record++;
    if (dut.u_mgr.en_sync.len) n_load++;
    if (dut.u_mgr.en_sync.ren) n_excl++;
    if (dut.g_bank[0].u_sub.cr && !dut.u_mgr.en_sync.ren) n_skip++;
    if (dut.g_bank[0].u_sub.u_ctrl.phase == cs_pkg::PH_STALL) n_stall++;
    if (dut.u_mgr.en_sync.sen && !dut.u_mgr.en_sync.len &&
        int'(dut.g_bank[0].u_sub.u_state.count) == K) n_drop++;
    for (int b = 0; b < N/NS; b++) if (dut.u_mgr.sel[b]) n_bank_out[b]++;
    if (dut.u_mgr.out_valid && prev_valid && prev_val == dut.u_mgr.out_val &&
        prev_sel != dut.u_mgr.sel) n_xbank_rep++;
    prev_valid <= dut.u_mgr.out_valid;
    prev_val   <= dut.u_mgr.out_val;
    prev_sel   <= dut.u_mgr.sel;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_set(input longint unsigned vals[], input string name);
    int order[$];
    ref_stats_t st;
    int got_idx[$];
    longint unsigned got_val[$];
    int cyc;
    st = ref_run(vals, W, K, order);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      prog_en = 1; prog_addr = r[$clog2(N)-1:0]; prog_data = vals[r][W-1:0];
    end
    @(negedge clk);
    prog_en = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin
      cyc++;
      @(negedge clk);
      if (out_valid) begin
        got_idx.push_back(int'(out_idx));
        got_val.push_back(longint'(out_val));
      end
    end
    check(got_idx.size() == N, $sformatf("%s: %0d outputs, want %0d", name, got_idx.size(), N));
    for (int i = 0; i < N && i < got_idx.size(); i++) begin
      check(got_idx[i] == order[i] && got_val[i] == vals[order[i]],
            $sformatf("%s: output %0d is row %0d value %0d, want row %0d value %0d",
                      name, i, got_idx[i], got_val[i], order[i], vals[order[i]]));
    end
    // cyc counts cycles from the first column read to the cycle of the last
    // registered output; the hardware found the last minimum one cycle earlier.
    check(cyc == st.cycles, $sformatf("%s: %0d cycles, reference %0d", name, cyc, st.cycles));
    $display("%s: %0d cycles for %0d numbers (%.2f cycles/number), records %0d loads %0d stalls %0d",
             name, cyc, N, real'(cyc) / N, st.records, st.loads, st.stall_cycles);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned vals[];
    int   e_cyc;
    logic [3:0] e_got [$];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Paper example: 7 column reads, outputs 8, 9, 10.
    for (int r = 0; r < 3; r++) begin
      @(negedge clk);
      e_prog_en = 1; e_prog_addr = r[1:0]; e_prog_data = 4'(8 + r);
    end
    @(negedge clk);
    e_prog_en = 0; e_start = 1;
    @(negedge clk);
    e_start = 0; e_cyc = 0;
    while (!e_done) begin
      e_cyc++;
      @(negedge clk);
      if (e_out_valid) e_got.push_back(e_out_val);
    end
    check(e_cyc == 7, $sformatf("example {8,9,10}: %0d cycles, want 7", e_cyc));
    check(e_got.size() == 3 && e_got[0] == 8 && e_got[1] == 9 && e_got[2] == 10,
          "example {8,9,10}: wrong output order");

    vals = new[N];
    // 1: random, many repeats across banks
    foreach (vals[i]) vals[i] = $urandom_range(0, 15) * 37;
    run_set(vals, "repeats");
    // 2: distinct-ish full range
    foreach (vals[i]) vals[i] = $urandom_range(0, (1 << W) - 1);
    run_set(vals, "uniform");
    // 3: clustered small values (leading zeros)
    foreach (vals[i]) vals[i] = (i % 2) ? $urandom_range(0, 31) : 1024 + $urandom_range(0, 63);
    run_set(vals, "clustered");
    // 4: all equal
    foreach (vals[i]) vals[i] = 12'h5a5;
    run_set(vals, "all-equal");
    // 5: descending
    foreach (vals[i]) vals[i] = 4000 - i * 3;
    run_set(vals, "descending");

    check(n_record > 0, "no state recording happened");
    check(n_load > 0, "no state loading happened");
    check(n_excl > 0, "no row exclusion happened");
    check(n_skip > 0, "no all-0/all-1 column happened");
    check(n_stall > 0, "no stall for repeated values happened");
    check(n_xbank_rep > 0, "no repeated value spread over two banks");
    check(n_drop > 0, "no record dropped from a full table");
    foreach (n_bank_out[b]) check(n_bank_out[b] > 0, $sformatf("bank %0d never selected", b));
    $display("mechanisms: record %0d load %0d exclude %0d skip %0d stall %0d cross-bank-repeat %0d drop %0d",
             n_record, n_load, n_excl, n_skip, n_stall, n_xbank_rep, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
