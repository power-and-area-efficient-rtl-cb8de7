// sized_sort_tb -- runs the sorter at the corner sizes of the published
// synthesis sweep (N = 8 to 256, M = 8 to 32): N = 8 / M = 8 over the full
// value range, N = 256 / M = 8 over the full value range, and
// N = 64 / M = 32 with values below 5000 (a full 32-bit range would need
// up to 2^32 cycles per sort). Passes when every result matches.
module sized_sort_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   c0, c1, c2, f0, f1, f2;
  logic d0, d1, d2;

  always #5 clk = ~clk;

  sized_sort_run #(.N(8),   .M(8),  .VMAX(255),  .ROUNDS(4)) run_small (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  sized_sort_run #(.N(256), .M(8),  .VMAX(255),  .ROUNDS(3)) run_wide  (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));
  sized_sort_run #(.N(64),  .M(32), .VMAX(4999), .ROUNDS(2)) run_deep  (.clk, .rst_n, .checks(c2), .failures(f2), .finished(d2));

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
