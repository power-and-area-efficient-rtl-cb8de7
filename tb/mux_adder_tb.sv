// mux_adder_tb -- self-checking testbench for the MUX/Adder.
//
// Drives random lane registers, addresses and Elapsed_Cycle values and
// compares `data` with (regs[addr] + Elapsed_Cycle - 1) mod 2^M computed in
// the testbench, including the cases the sorter actually produces (register
// 0, Elapsed_Cycle = 1 and 2^M) and the paper's example (register 0,
// Elapsed_Cycle 5 gives 4, i.e. 0.100 with M = 3 -- here on 16 bits).
module mux_adder_tb;
  localparam int unsigned N  = 32;
  localparam int unsigned M  = 16;
  localparam int unsigned AW = $clog2(N);

  logic [N-1:0][M-1:0] regs;
  logic [AW-1:0] addr;
  logic [M:0] elapsed_cycle;
  logic [M-1:0] data;
  int checks = 0, failures = 0;

  mux_adder #(.N(N), .M(M)) dut (.regs, .addr, .elapsed_cycle, .data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned expv;
    for (int i = 0; i < N; i++) regs[i] = M'($urandom);
    // Paper example.
    regs[3] = '0; addr = 3; elapsed_cycle = 5; #1;
    check(data == 4, "register 0 + 5 - 1 = 4");
    // Extremes of a found minimum.
    regs[7] = '0; addr = 7; elapsed_cycle = 1; #1;
    check(data == 0, "value 0 found after 1 cycle");
    elapsed_cycle = (M+1)'(1) << M; #1;
    check(data == {M{1'b1}}, "value 2^M-1 found after 2^M cycles");
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) regs[i] = ($urandom_range(0, 1) == 0) ? '0 : M'($urandom);
      addr = AW'($urandom_range(0, N - 1));
      elapsed_cycle = (M+1)'($urandom_range(1, 1 << M));
      #1;
      expv = (longint'(regs[addr]) + longint'(elapsed_cycle) - 1) % (longint'(1) << M);
      check(data == M'(expv), $sformatf("addr %0d reg %0d elapsed %0d -> %0d", addr, regs[addr], elapsed_cycle, data));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
