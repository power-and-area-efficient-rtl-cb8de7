// sorting_engine_tb -- self-checking testbench for the sorting engine.
//
// First the paper's three-input example with M = 3 (p1 = 4, p2 = 6, p3 = 4
// on lanes 0..2, the other lanes at 7): after the 5th enabled cycle lanes 0
// and 2 are flagged (ds = 2, address 0, then 2 after a clear) with their
// registers at 0, and lane 1 follows after the 7th. Then random rounds on a
// 16-bit engine: the testbench steps the engine while ds == 0, clears one
// flag per cycle otherwise, and checks that the lanes are found in ascending
// order of value (ties by lane index), each after exactly value + 1 enabled
// cycles and with its register at 0, against a sorted copy of the inputs.
module sorting_engine_tb;
  localparam int unsigned N   = 32;
  localparam int unsigned M   = 16;
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned DSW = $clog2(N + 1);

  logic clk = 1'b0;
  logic rst_n, load, en, clr;
  logic [N-1:0][M-1:0] values, regs;
  logic [N-1:0][2:0]   values3, regs3;
  logic [N-1:0] ubits, hit, ubits3, hit3;
  logic [AW-1:0] addr, addr3;
  logic [DSW-1:0] ds, ds3;
  logic dup, dup3, load3, en3, clr3;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sorting_engine #(.N(N), .M(M)) dut (.clk, .rst_n, .load, .values, .en, .clr,
    .regs, .ubits, .hit, .addr, .ds, .dup);
  sorting_engine #(.N(N), .M(3)) dut3 (.clk, .rst_n, .load(load3), .values(values3),
    .en(en3), .clr(clr3), .regs(regs3), .ubits(ubits3), .hit(hit3), .addr(addr3),
    .ds(ds3), .dup(dup3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned steps, written, vmax;
    int unsigned exp_idx[$], exp_val[$];
    rst_n = 0; load = 0; en = 0; clr = 0; load3 = 0; en3 = 0; clr3 = 0;
    values = '0; values3 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Paper example.
    for (int i = 0; i < N; i++) values3[i] = 3'd7;
    values3[0] = 3'd4; values3[1] = 3'd6; values3[2] = 3'd4;
    @(negedge clk); load3 = 1;
    @(negedge clk); load3 = 0; en3 = 1;
    repeat (4) begin @(negedge clk); check(ds3 == 0, "example: nothing before cycle 5"); end
    check(ubits3[0] && ubits3[2], "example: p1, p3 streams still 1 after 4 cycles");
    @(negedge clk); en3 = 0;
    check(ds3 == 2 && dup3 && addr3 == 0 && regs3[0] == 0 && regs3[2] == 0 && !ubits3[0],
          $sformatf("example cycle 5: ds=%0d addr=%0d", ds3, addr3));
    clr3 = 1; @(negedge clk);
    check(ds3 == 1 && addr3 == 2, "example: second minimum at lane 2");
    @(negedge clk); clr3 = 0;
    en3 = 1; @(negedge clk); check(ds3 == 0, "example: cycle 6 empty");
    @(negedge clk); en3 = 0;
    check(ds3 == 1 && addr3 == 1 && regs3[1] == 0, "example: p2 found at cycle 7");

    // Random rounds on the 16-bit engine.
    for (int r = 0; r < 12; r++) begin
      vmax = (r < 4) ? 8 : ((r < 8) ? 300 : 2000);
      for (int i = 0; i < N; i++) values[i] = M'($urandom_range(0, vmax));
      if (r == 11) values[5] = '0;
      // Reference: stable ordering by value, then by lane index.
      exp_idx.delete(); exp_val.delete();
      for (int v = 0; v <= int'(vmax); v++)
        for (int i = 0; i < N; i++)
          if (values[i] == M'(v)) begin exp_idx.push_back(i); exp_val.push_back(v); end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      steps = 0; written = 0;
      while (written < N) begin
        if (ds == 0) begin
          en = 1; clr = 0;
        end else begin
          check(addr == AW'(exp_idx[written]),
                $sformatf("round %0d: #%0d found lane %0d, expected %0d", r, written, addr, exp_idx[written]));
          check(steps == exp_val[written] + 1,
                $sformatf("round %0d: lane %0d found after %0d cycles, value %0d", r, addr, steps, exp_val[written]));
          check(regs[addr] == '0 && !ubits[addr], "found lane register and stream at 0");
          en = 0; clr = 1;
          written++;
        end
        @(negedge clk);
        if (en) steps++;
      end
      en = 0; clr = 0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
