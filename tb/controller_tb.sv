// controller_tb -- self-checking testbench for the controller.
//
// The sorting engine is replaced by a small behavioural model in this file:
// it holds a list of input values and, each cycle the controller's Enable is
// high, advances its own cycle count and adds to the pending flag count
// (ds) every value equal to that count - 1; each clr removes one pending
// flag. Checked against values worked out in the testbench: Enable is high
// exactly in FIND with ds == 0; load only on start in IDLE; FIND moves to
// PUT when ds > 0 and PUT lasts exactly ds cycles (X == ds); the output
// addresses run 0, 1, ..., N-1; Elapsed_Cycle at each write equals the
// written value + 1 (so Elapsed_Cycle - 1 is the value); and done arrives
// 1 + (Vmax + 1) + G + N cycles after start.
module controller_tb;
  import unary_sorter_pkg::*;
  localparam int unsigned N   = 32;
  localparam int unsigned M   = 16;
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned DSW = $clog2(N + 1);

  logic clk = 1'b0;
  logic rst_n, start;
  logic [DSW-1:0] ds;
  ctrl_state_t state;
  logic load, enable, cnten, clr, wr_en, busy, done;
  logic [AW-1:0] wr_addr;
  logic [M:0] elapsed_cycle;
  int checks = 0, failures = 0;
  int unsigned vals[N];
  int unsigned model_cnt, pending;

  always #5 clk = ~clk;

  controller #(.N(N), .M(M)) dut (.clk, .rst_n, .start, .ds, .state, .load, .enable,
    .cnten, .clr, .wr_en, .wr_addr, .elapsed_cycle, .busy, .done);

  assign ds = DSW'(pending);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_sort(input int unsigned vmax);
    int unsigned sorted_v[$], groups, cycles, nwr, put_len, ds_at_entry;
    ctrl_state_t prev;
    bit seen[int unsigned];
    bit en_s, clr_s;
    foreach (vals[i]) begin
      vals[i] = $urandom_range(0, vmax);
      sorted_v.push_back(vals[i]);
      seen[vals[i]] = 1;
    end
    sorted_v.sort();
    groups = seen.num();
    @(negedge clk);
    check(state == ST_IDLE && !busy, "idle before start");
    start = 1;
    #1;
    check(load && !enable, "load on start");
    @(negedge clk); start = 0;
    model_cnt = 0; pending = 0;
    cycles = 1; nwr = 0; put_len = 0; ds_at_entry = 0;
    prev = state;
    while (!done && cycles < 200000) begin
      check(load == 1'b0, "no load while busy");
      check(enable == (state == ST_FIND && pending == 0), "Enable = FIND and ds == 0");
      check(cnten == (state == ST_PUT) && wr_en == cnten && clr == cnten, "CNTEN/write/clear in PUT");
      if (state == ST_FIND && pending != 0) ds_at_entry = pending;
      if (wr_en) begin
        check(wr_addr == AW'(nwr), $sformatf("write address %0d expected %0d", wr_addr, nwr));
        check(elapsed_cycle == (M+1)'(sorted_v[nwr] + 1),
              $sformatf("Elapsed_Cycle %0d for value %0d", elapsed_cycle, sorted_v[nwr]));
        nwr++;
        put_len++;
      end
      en_s = enable;
      clr_s = clr;
      @(posedge clk);
      #1;
      if (en_s) begin
        model_cnt++;
        foreach (vals[i]) if (vals[i] == model_cnt - 1) pending++;
      end
      if (clr_s) pending--;
      @(negedge clk);
      if (prev == ST_PUT && state != ST_PUT) begin
        check(put_len == ds_at_entry, $sformatf("PUT lasted %0d cycles for ds %0d", put_len, ds_at_entry));
        put_len = 0;
      end
      prev = state;
      cycles++;
    end
    check(done && state == ST_IDLE, "done pulse and back to IDLE");
    check(nwr == N, $sformatf("%0d writes", nwr));
    check(cycles == 1 + (sorted_v[N-1] + 1) + groups + N,
          $sformatf("sort took %0d cycles, expected %0d", cycles, 1 + (sorted_v[N-1] + 1) + groups + N));
    @(negedge clk);
    check(!done, "done is a single-cycle pulse");
  endtask

  initial begin
    rst_n = 0; start = 0; model_cnt = 0; pending = 0;
    foreach (vals[i]) vals[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_sort(0);
    run_sort(3);
    run_sort(40);
    run_sort(1000);
    run_sort(65535);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
