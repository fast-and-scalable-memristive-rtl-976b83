// Workload sweep at the full array size (1024 elements of 32 bits): ten
// sorters side by side, seven single-bank ones with K = 1, 2, 3, 4, 6, 8 and
// 10 records, and three multi-bank ones with K = 2 built from sub-sorters of
// 64, 256 and 512 rows. All are programmed with the same data and started
// together on each of the five data sets of tb_cs_sorter_full (same
// generators).
//
// Checks: every sorter emits the stable sort of the data; every cycle count
// equals the reference model for its K; each multi-bank sorter takes exactly
// as many cycles as the single-bank K = 2 sorter (banking does not change the
// number of column reads). A table of speed-ups over 32 cycles per number is
// printed per data set and K.
module tb_cs_sweep;
  import sort_ref_pkg::*;

  localparam int N = 1024;
  localparam int W = 32;
  localparam int ND = 10;
  localparam int KS  [ND] = '{1, 2, 3, 4, 6, 8, 10, 2, 2, 2};
  localparam int NSS [ND] = '{1024, 1024, 1024, 1024, 1024, 1024, 1024, 64, 256, 512};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic        prog_en = 0, start = 0;
  logic [9:0]  prog_addr = '0;
  logic [31:0] prog_data = '0;
  logic        done [ND];
  int          cyc [ND];
  int          nout [ND];
  int          nbad [ND];
  int          exp_order [ND][$];
  longint unsigned vals[];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  for (genvar g = 0; g < ND; g++) begin : g_dut
    logic        busy, out_valid;
    logic [9:0]  out_idx;
    logic [31:0] out_val;
    cs_sorter #(.N(N), .W(W), .K(KS[g]), .NS(NSS[g])) dut (
      .clk, .rst_n, .prog_en, .prog_addr, .prog_data, .start,
      .busy, .done(done[g]), .out_valid, .out_idx, .out_val
    );
    always @(posedge clk) begin
      if (start) begin
        cyc[g] <= 0; nout[g] <= 0; nbad[g] <= 0;
      end else if (rst_n && !done[g]) begin
        cyc[g] <= cyc[g] + 1;
      end
      if (rst_n && !start && out_valid) begin
        if (nout[g] >= N || int'(out_idx) != exp_order[g][nout[g]] ||
            longint'(out_val) != vals[out_idx]) nbad[g] <= nbad[g] + 1;
        nout[g] <= nout[g] + 1;
      end
    end
  end

  function automatic longint unsigned clamp32(input longint v);
    if (v < 0) return 0;
    if (v > 64'hffff_ffff) return 64'hffff_ffff;
    return longint'(v);
  endfunction

  function automatic longint gauss_q20();
    longint s = 0;
    for (int i = 0; i < 12; i++) s += longint'($urandom_range(0, (1 << 20) - 1));
    return s - 6 * (longint'(1) << 20);
  endfunction

  task automatic run_set(input string name);
    ref_stats_t st [ND];
    bit all_done;
    string line;
    for (int g = 0; g < ND; g++) st[g] = ref_run(vals, W, KS[g], exp_order[g]);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      prog_en = 1; prog_addr = r[9:0]; prog_data = vals[r][31:0];
    end
    @(negedge clk);
    prog_en = 0; start = 1;
    @(negedge clk);
    start = 0;
    do begin
      @(negedge clk);
      all_done = 1;
      for (int g = 0; g < ND; g++) all_done &= done[g];
    end while (!all_done);
    @(negedge clk);
    line = $sformatf("%-10s", name);
    for (int g = 0; g < ND; g++) begin
      chk(nout[g] == N && nbad[g] == 0,
          $sformatf("%s K=%0d NS=%0d: %0d outputs, %0d wrong", name, KS[g], NSS[g], nout[g], nbad[g]));
      chk(cyc[g] == st[g].cycles,
          $sformatf("%s K=%0d NS=%0d: %0d cycles, reference %0d", name, KS[g], NSS[g], cyc[g], st[g].cycles));
      if (NSS[g] != N)
        chk(cyc[g] == cyc[1], $sformatf("%s NS=%0d: %0d cycles, single bank %0d", name, NSS[g], cyc[g], cyc[1]));
      line = {line, $sformatf(" %5.2fx", 32.0 * N / real'(cyc[g]))};
    end
    $display("%s", line);
  endtask

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vals = new[N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    $display("speed-up over 32 cycles/number");
    $display("data set    K=1    K=2    K=3    K=4    K=6    K=8   K=10  Ns=64 Ns=256 Ns=512");

    foreach (vals[i]) vals[i] = longint'($urandom());
    run_set("uniform");
    foreach (vals[i]) vals[i] = (longint'($urandom()) + longint'($urandom()) + longint'($urandom())) / 3;
    run_set("normal");
    foreach (vals[i]) begin
      longint centre = ($urandom_range(0, 1) != 0) ? (longint'(1) << 25) : (longint'(1) << 15);
      vals[i] = clamp32(centre + ((gauss_q20() << 13) >>> 20));
    end
    run_set("clustered");
    foreach (vals[i]) vals[i] = ($urandom_range(0, 9) != 0) ? $urandom_range(1, 64)
                                                              : $urandom_range(1, 1 << 16);
    run_set("kruskal");
    foreach (vals[i]) vals[i] = longint'($urandom_range(0, 7)) * 1000 + $urandom_range(0, 15);
    run_set("mapreduce");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
