// Full-size testbench: the sorter at its default size (1024 elements of
// 32 bits, K = 2 records, one bank) sorting the five kinds of data the
// design was evaluated on: uniform over 0..2^32-1; normal with mean 2^31 and
// standard deviation 2^31/3 (mean of three uniforms, which has exactly that
// mean and deviation); two clusters centred at 2^15 and 2^25 with standard
// deviation 2^13 (approximately normal, sum of twelve uniforms); and two
// application-like sets made here, since their exact contents are not
// published: "kruskal" (graph edge weights, mostly small and often repeated)
// and "mapreduce" (keys falling into a few groups).
//
// Every output is checked against a stable sort of the data and the cycle
// count against the reference model; the cycles per number and the speed-up
// over a bit-traversal sorter without column skipping (32 cycles per number)
// are printed.
module tb_cs_sorter_full;
  import sort_ref_pkg::*;

  localparam int N = 1024;
  localparam int W = 32;
  localparam int K = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic          prog_en = 0, start = 0;
  logic [9:0]    prog_addr = '0;
  logic [31:0]   prog_data = '0;
  logic          busy, done, out_valid;
  logic [9:0]    out_idx;
  logic [31:0]   out_val;

  cs_sorter dut (
    .clk, .rst_n, .prog_en, .prog_addr, .prog_data, .start,
    .busy, .done, .out_valid, .out_idx, .out_val
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic longint unsigned clamp32(input longint v);
    if (v < 0) return 0;
    if (v > 64'hffff_ffff) return 64'hffff_ffff;
    return longint'(v);
  endfunction

  // Approximately standard normal, scaled by 2^20 (sum of 12 uniforms - 6).
  function automatic longint gauss_q20();
    longint s = 0;
    for (int i = 0; i < 12; i++) s += longint'($urandom_range(0, (1 << 20) - 1));
    return s - 6 * (longint'(1) << 20);
  endfunction

  task automatic run_set(input longint unsigned vals[], input string name);
    int order[$];
    ref_stats_t st;
    int got_idx[$];
    longint unsigned got_val[$];
    int cyc, bad;
    st = ref_run(vals, W, K, order);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      prog_en = 1; prog_addr = r[9:0]; prog_data = vals[r][31:0];
    end
    @(negedge clk);
    prog_en = 0; start = 1;
    @(negedge clk);
    start = 0; cyc = 0;
    while (!done) begin
      cyc++;
      @(negedge clk);
      if (out_valid) begin
        got_idx.push_back(int'(out_idx));
        got_val.push_back(longint'(out_val));
      end
    end
    check(got_idx.size() == N, $sformatf("%s: %0d outputs", name, got_idx.size()));
    bad = 0;
    for (int i = 0; i < N && i < got_idx.size(); i++)
      if (got_idx[i] != order[i] || got_val[i] != vals[order[i]]) bad++;
    check(bad == 0, $sformatf("%s: %0d outputs out of order", name, bad));
    for (int i = 1; i < got_val.size(); i++)
      if (got_val[i] < got_val[i-1]) bad++;
    check(bad == 0, $sformatf("%s: output not ascending", name));
    check(cyc == st.cycles, $sformatf("%s: %0d cycles, reference %0d", name, cyc, st.cycles));
    $display("%-10s %6d cycles, %5.2f cycles/number, speed-up over 32 cycles/number %4.2fx (records %0d, loads %0d, stall cycles %0d)",
             name, cyc, real'(cyc) / N, 32.0 * N / real'(cyc), st.records, st.loads, st.stall_cycles);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned vals[];
    repeat (3) @(negedge clk);
    rst_n = 1;
    vals = new[N];

    foreach (vals[i]) vals[i] = longint'($urandom());
    run_set(vals, "uniform");

    foreach (vals[i]) vals[i] = (longint'($urandom()) + longint'($urandom()) + longint'($urandom())) / 3;
    run_set(vals, "normal");

    foreach (vals[i]) begin
      longint centre = ($urandom_range(0, 1) != 0) ? (longint'(1) << 25) : (longint'(1) << 15);
      vals[i] = clamp32(centre + ((gauss_q20() << 13) >>> 20));
    end
    run_set(vals, "clustered");

    // Edge weights of a sparse graph: mostly 1..64, a few up to 2^16.
    foreach (vals[i]) vals[i] = ($urandom_range(0, 9) != 0) ? $urandom_range(1, 64)
                                                              : $urandom_range(1, 1 << 16);
    run_set(vals, "kruskal");

    // Keys of eight groups, sixteen distinct keys per group.
    foreach (vals[i]) vals[i] = longint'($urandom_range(0, 7)) * 1000 + $urandom_range(0, 15);
    run_set(vals, "mapreduce");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
