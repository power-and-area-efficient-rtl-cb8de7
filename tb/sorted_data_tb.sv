// sorted_data_tb -- self-checking testbench for the output registers.
//
// Checks reset to zero, then performs random writes (with `we` sometimes
// low) and compares all N entries with a model array after every cycle,
// so a write to the wrong entry, a lost write or a write with `we` low is
// caught.
module sorted_data_tb;
  localparam int unsigned N  = 32;
  localparam int unsigned M  = 16;
  localparam int unsigned AW = $clog2(N);

  logic clk = 1'b0;
  logic rst_n, we;
  logic [AW-1:0] addr;
  logic [M-1:0] data;
  logic [N-1:0][M-1:0] q;
  logic [M-1:0] model [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sorted_data #(.N(N), .M(M)) dut (.clk, .rst_n, .we, .addr, .data, .q);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; we = 0; addr = '0; data = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) check(q[i] == '0, "reset value");
    for (int t = 0; t < 1000; t++) begin
      we = ($urandom_range(0, 3) != 0);
      addr = AW'($urandom_range(0, N - 1));
      data = M'($urandom);
      @(negedge clk);
      if (we) model[addr] = data;
      for (int i = 0; i < N; i++) check(q[i] == model[i], $sformatf("entry %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
