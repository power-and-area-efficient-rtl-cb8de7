// cfung_tb -- self-checking testbench for one CFUNG lane.
//
// Checks the paper's worked example (M = 3, input 0.100 = 4 gives the
// right-aligned stream 00001111 over 8 cycles) on a 3-bit lane, then loads
// random 16-bit values into a lane of the default width and, with the clock
// enable toggled at random, compares after every enabled step the stream
// bit, out_or and the register against a reference: after k enabled steps
// the bit is (k <= v) and the register is v - min(k - 1, v). It also counts
// the ones in each stream (must equal v) and checks that disabled cycles
// change nothing.
module cfung_tb;
  localparam int unsigned M = 16;

  logic clk = 1'b0;
  logic rst_n;
  logic load, en, load3, en3;
  logic [M-1:0] value, reg_q;
  logic [2:0]   value3, reg3;
  logic out_or, ubit, out_or3, ubit3;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cfung #(.M(M)) dut (.clk, .rst_n, .load, .value, .en, .out_or, .ubit, .reg_q);
  cfung #(.M(3)) dut3 (.clk, .rst_n, .load(load3), .value(value3), .en(en3),
                       .out_or(out_or3), .ubit(ubit3), .reg_q(reg3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string s;
    int unsigned v, k, ones, vals[$];
    rst_n = 1'b0; load = 0; en = 0; value = '0; load3 = 0; en3 = 0; value3 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // Paper example: 0.100 with M = 3 -> 00001111 (first bit on the right).
    @(negedge clk); value3 = 3'b100; load3 = 1;
    @(negedge clk); load3 = 0; en3 = 1;
    s = "";
    for (int c = 0; c < 8; c++) begin
      @(negedge clk);
      s = {(ubit3 ? "1" : "0"), s};
    end
    en3 = 0;
    check(s == "00001111", $sformatf("paper example stream %s", s));
    check(reg3 == 3'd0, "paper example register ends at 0");

    // Random values on the 16-bit lane, plus the extremes.
    vals = '{0, 1, 2, 65535};
    for (int t = 0; t < 8; t++) vals.push_back($urandom_range(0, 3000));
    foreach (vals[t]) begin
      v = vals[t];
      @(negedge clk); value = M'(v); load = 1; en = 0;
      @(negedge clk); load = 0;
      check(ubit == 1'b0 && reg_q == M'(v), "state after load");
      k = 0; ones = 0;
      while (k < v + 3) begin
        en = ($urandom_range(0, 3) != 0);
        if (en) check(out_or == ((k + 1) <= v), $sformatf("out_or v=%0d k=%0d", v, k + 1));
        @(negedge clk);
        if (en) begin
          k++;
          ones += ubit;
          if (v < 70000 && (v < 100 || k % 97 == 0 || k + 3 >= v))
            check(ubit == (k <= v) && reg_q == M'(v - ((k - 1 < v) ? k - 1 : v)),
                  $sformatf("step v=%0d k=%0d ubit=%0d reg=%0d", v, k, ubit, reg_q));
        end
      end
      en = 0;
      check(ones == v, $sformatf("v=%0d gave %0d ones", v, ones));
      @(negedge clk);
      check(ubit == 1'b0 && reg_q == '0, "holds 0 with enable low");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
