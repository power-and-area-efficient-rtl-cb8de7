// sed_tb -- self-checking testbench for the smallest element detector.
//
// The lanes' out_or inputs are driven from a list of per-lane values as
// ideal unary streams would produce them (out_or of lane i at enabled step k
// is k <= v_i). A small reference model, written independently of the
// detector, keeps the expected found/hit sets; the testbench enables
// stepping while no lane is flagged and otherwise clears one flag per cycle,
// like the controller. ds, dup and addr (lowest flagged lane) are compared
// every cycle. Several rounds: random values with many ties, all lanes
// equal, and the paper's three-input example (4, 6, 4 -> ds = 2 at step 5).
module sed_tb;
  localparam int unsigned N   = 32;
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned DSW = $clog2(N + 1);

  logic clk = 1'b0;
  logic rst_n, load, en, clr;
  logic [N-1:0] out_or, hit;
  logic [AW-1:0] addr;
  logic [DSW-1:0] ds;
  logic dup;
  int checks = 0, failures = 0;
  int unsigned vals[N];
  bit exp_found[N], exp_hit[N];
  int unsigned step;

  always #5 clk = ~clk;

  sed #(.N(N)) dut (.clk, .rst_n, .load, .en, .out_or, .clr, .hit, .addr, .ds, .dup);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Ideal unary streams: next bit of lane i at step `step + 1`.
  always_comb
    for (int i = 0; i < N; i++) out_or[i] = ((step + 1) <= vals[i]);

  task automatic run_round(input int unsigned nlanes_used, output int unsigned dup_seen);
    int unsigned e_ds, e_addr, written;
    dup_seen = 0;
    @(negedge clk); load = 1; step = 0;
    foreach (exp_found[i]) begin exp_found[i] = 0; exp_hit[i] = 0; end
    @(negedge clk); load = 0;
    written = 0;
    while (written < nlanes_used) begin
      e_ds = 0; e_addr = N;
      for (int i = N - 1; i >= 0; i--) if (exp_hit[i]) begin e_ds++; e_addr = i; end
      check(ds == DSW'(e_ds), $sformatf("ds=%0d expected %0d at step %0d", ds, e_ds, step));
      check(dup == (e_ds > 1), "duplication sign");
      if (e_ds > 1) dup_seen++;
      if (e_ds == 0) begin
        en = 1; clr = 0;
      end else begin
        check(addr == AW'(e_addr), $sformatf("addr=%0d expected %0d", addr, e_addr));
        en = 0; clr = 1;
      end
      @(negedge clk);
      if (en) begin
        step++;
        for (int i = 0; i < N; i++)
          if (!exp_found[i] && vals[i] == step - 1) begin exp_found[i] = 1; exp_hit[i] = 1; end
      end else begin
        exp_hit[e_addr] = 0;
        written++;
      end
      for (int i = 0; i < N; i++)
        check(hit[i] == exp_hit[i], $sformatf("hit[%0d] at step %0d", i, step));
    end
    en = 0; clr = 0;
    // All flags found, nothing left: more enabled steps must flag nothing.
    en = 1; @(negedge clk); @(negedge clk); en = 0;
    check(ds == '0, "no second detection of an ended stream");
  endtask

  initial begin
    int unsigned d;
    rst_n = 0; load = 0; en = 0; clr = 0; step = 0;
    foreach (vals[i]) vals[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Paper example on lanes 0..2; the other lanes hold larger values.
    foreach (vals[i]) vals[i] = 20 + i;
    vals[0] = 4; vals[1] = 6; vals[2] = 4;
    @(negedge clk); load = 1; step = 0;
    @(negedge clk); load = 0;
    en = 1;
    repeat (4) begin @(negedge clk); step++; check(ds == 0, "no minimum before step 5"); end
    @(negedge clk); step++; en = 0;
    check(ds == 2 && dup && addr == 0, $sformatf("step 5: ds=%0d addr=%0d", ds, addr));
    clr = 1; @(negedge clk); clr = 0;
    check(ds == 1 && !dup && addr == 2, $sformatf("after clear: ds=%0d addr=%0d", ds, addr));
    clr = 1; @(negedge clk); clr = 0;
    check(ds == 0, "both flags cleared");
    en = 1; @(negedge clk); step++; check(ds == 0, "step 6: none");
    @(negedge clk); step++; en = 0;
    check(ds == 1 && addr == 1, $sformatf("step 7: ds=%0d addr=%0d", ds, addr));

    // Random rounds with many ties.
    for (int r = 0; r < 20; r++) begin
      foreach (vals[i]) vals[i] = $urandom_range(0, (r < 10) ? 6 : 60);
      run_round(N, d);
    end
    // All equal.
    foreach (vals[i]) vals[i] = 3;
    run_round(N, d);
    check(d == N - 1, "all-equal round: ds > 1 until the last flag");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
