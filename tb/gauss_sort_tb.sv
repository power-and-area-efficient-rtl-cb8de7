// gauss_sort_tb -- runs the published cycle-count evaluation workloads:
// 128 inputs from Gaussian distributions at M = 5, 6 and 8 bits, one
// gauss_sort_run instance per data width, all in parallel. Passes when
// every result of every run matches its reference.
module gauss_sort_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   c5, c6, c8, f5, f6, f8;
  logic d5, d6, d8;

  always #5 clk = ~clk;

  gauss_sort_run #(.M(5)) run5 (.clk, .rst_n, .checks(c5), .failures(f5), .finished(d5));
  gauss_sort_run #(.M(6)) run6 (.clk, .rst_n, .checks(c6), .failures(f6), .finished(d6));
  gauss_sort_run #(.M(8)) run8 (.clk, .rst_n, .checks(c8), .failures(f8), .finished(d8));

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c5 + c6 + c8, f5 + f6 + f8 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d5 && d6 && d8);
    $display("TB_RESULT checks=%0d failures=%0d", c5 + c6 + c8, f5 + f6 + f8);
    $finish;
  end
endmodule
