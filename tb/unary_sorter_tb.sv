// unary_sorter_tb -- end-to-end testbench of the unary sorter at its
// default size (N = 32 inputs of M = 16 bits, no parameter overrides).
//
// Each round loads N values, pulses start and follows the sort to done. The
// reference is the input list sorted in the testbench. Checked: every
// streamed result (wr_addr must run 0..N-1 and wr_data must equal the
// reference entry), the full `sorted` array at done, and the cycle count
// from start to done, 1 + (Vmax + 1) + G + N (Vmax the largest value, G the
// number of distinct values). Rounds: the paper's example values
// (0.5, 0.75, 0.5 as 16-bit fractions) among random data, full-range random
// data including 0 and 2^16 - 1, narrow-range data with many ties, and all
// inputs equal. The testbench counts how often each mechanism occurs --
// a stop of the streams for a single minimum (ds = 1), a stop for tied
// minima (duplication sign, ds > 1), a zero input, a full-scale input and a
// back-to-back sort -- and counts a failure for any that never occurred.
module unary_sorter_tb;
  localparam int unsigned N   = unary_sorter_pkg::DEFAULT_N;
  localparam int unsigned M   = unary_sorter_pkg::DEFAULT_M;
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned DSW = $clog2(N + 1);

  logic clk = 1'b0;
  logic rst_n, start, busy, done, wr_valid, dup;
  logic [N-1:0][M-1:0] in_data, sorted;
  logic [AW-1:0] wr_addr;
  logic [M-1:0] wr_data;
  logic [DSW-1:0] ds;
  logic [M:0] elapsed_cycle;
  int checks = 0, failures = 0;
  int n_single = 0, n_dup = 0, n_zero = 0, n_full = 0, n_b2b = 0, n_sorts = 0;

  always #5 clk = ~clk;

  unary_sorter dut (.clk, .rst_n, .start, .in_data, .busy, .done, .wr_valid,
    .wr_addr, .wr_data, .ds, .dup, .elapsed_cycle, .sorted);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stops of the streams: the cycle a minimum is flagged while the streams run.
  always @(posedge clk) begin
    if (rst_n && busy && !wr_valid && ds != '0) begin
      if (dup) n_dup++;
      else n_single++;
      checks++;
      if (dup != (ds > 1)) begin failures++; $display("FAIL: dup vs ds"); end
    end
  end

  task automatic run_sort(input bit back_to_back);
    int unsigned ref_v[$], groups, cycles, nwr, vmax;
    bit seen[int unsigned];
    for (int i = 0; i < N; i++) begin
      ref_v.push_back(in_data[i]);
      seen[in_data[i]] = 1;
      if (in_data[i] == '0) n_zero++;
      if (in_data[i] == '1) n_full++;
    end
    ref_v.sort();
    vmax = ref_v[N-1];
    groups = seen.num();
    if (!back_to_back) @(negedge clk);
    else n_b2b++;
    check(!busy, "idle at start");
    start = 1;
    @(negedge clk); start = 0;
    cycles = 1; nwr = 0;
    while (!done && cycles < 1000000) begin
      if (wr_valid) begin
        check(wr_addr == AW'(nwr), $sformatf("result address %0d, expected %0d", wr_addr, nwr));
        check(wr_data == M'(ref_v[nwr]), $sformatf("result #%0d = %0d, expected %0d", nwr, wr_data, ref_v[nwr]));
        nwr++;
      end
      @(negedge clk);
      cycles++;
    end
    n_sorts++;
    check(done, "done reached");
    check(nwr == N, $sformatf("%0d results written", nwr));
    for (int i = 0; i < N; i++)
      check(sorted[i] == M'(ref_v[i]), $sformatf("sorted[%0d] = %0d, expected %0d", i, sorted[i], ref_v[i]));
    check(cycles == 1 + (vmax + 1) + groups + N,
          $sformatf("sort took %0d cycles, expected %0d", cycles, 1 + (vmax + 1) + groups + N));
    $display("sort %0d: Vmax=%0d distinct=%0d cycles=%0d", n_sorts, vmax, groups, cycles);
  endtask

  initial begin
    rst_n = 0; start = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Paper example: 0.5, 0.75, 0.5 on lanes 0..2 (16-bit fractions).
    for (int i = 0; i < N; i++) in_data[i] = M'($urandom_range(40000, 65535));
    in_data[0] = 16'h8000; in_data[1] = 16'hC000; in_data[2] = 16'h8000;
    run_sort(0);

    // Full range, with both extremes present.
    for (int i = 0; i < N; i++) in_data[i] = M'($urandom);
    in_data[7] = '0; in_data[20] = '1;
    run_sort(0);

    // Narrow range: many tied values; started in the cycle after done.
    for (int i = 0; i < N; i++) in_data[i] = M'($urandom_range(0, 9));
    run_sort(1);

    // All inputs equal.
    for (int i = 0; i < N; i++) in_data[i] = 16'd1234;
    run_sort(0);

    check(n_single > 0, "single-minimum stop never happened");
    check(n_dup > 0, "tied-minimum stop never happened");
    check(n_zero > 0, "zero input never sorted");
    check(n_full > 0, "full-scale input never sorted");
    check(n_b2b > 0, "back-to-back sort never happened");
    $display("mechanisms: single-minimum stops=%0d tied-minimum stops=%0d zero inputs=%0d full-scale inputs=%0d back-to-back sorts=%0d sorts=%0d",
             n_single, n_dup, n_zero, n_full, n_b2b, n_sorts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
