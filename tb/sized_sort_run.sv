// sized_sort_run -- sorts random data on a unary sorter of a given size.
//
// Instantiates unary_sorter with N inputs of M bits and runs ROUNDS sorts
// of uniform random values in [0, VMAX] (VMAX below 2^M keeps wide-M runs
// short: the sort time follows the largest value, not M). Every streamed
// result is compared with the sorted input list, and the sort time with
// 1 + (Vmax + 1) + G + N cycles. Reports on `checks`/`failures` and raises
// `finished` at the end.
module sized_sort_run #(
  parameter int unsigned N      = 8,
  parameter int unsigned M      = 8,
  parameter int unsigned VMAX   = 255,
  parameter int unsigned ROUNDS = 3
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned DSW = $clog2(N + 1);

  logic start, busy, done, wr_valid, dup;
  logic [N-1:0][M-1:0] in_data, sorted;
  logic [AW-1:0] wr_addr;
  logic [M-1:0] wr_data;
  logic [DSW-1:0] ds;
  logic [M:0] elapsed_cycle;

  unary_sorter #(.N(N), .M(M)) dut (.clk, .rst_n, .start, .in_data, .busy, .done,
    .wr_valid, .wr_addr, .wr_data, .ds, .dup, .elapsed_cycle, .sorted);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL (N=%0d M=%0d): %s", N, M, what);
    end
  endtask

  initial begin
    int unsigned ref_v[$], nwr, cycles, groups;
    bit seen[int unsigned];
    checks = 0; failures = 0; finished = 0; start = 0; in_data = '0;
    @(posedge rst_n);
    for (int r = 0; r < int'(ROUNDS); r++) begin
      seen.delete();
      ref_v.delete();
      for (int i = 0; i < N; i++) begin
        in_data[i] = M'($urandom_range(0, VMAX));
        ref_v.push_back(int'(in_data[i]));
        seen[int'(in_data[i])] = 1;
      end
      ref_v.sort();
      groups = seen.num();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      nwr = 0; cycles = 1;
      while (!done) begin
        if (wr_valid) begin
          check(wr_addr == AW'(nwr) && wr_data == M'(ref_v[nwr]),
                $sformatf("result #%0d = %0d at %0d, expected %0d", nwr, wr_data, wr_addr, ref_v[nwr]));
          nwr++;
        end
        @(negedge clk);
        cycles++;
      end
      check(nwr == N, "all results written");
      check(cycles == 1 + (ref_v[N-1] + 1) + groups + N, $sformatf("sort took %0d cycles", cycles));
      for (int i = 0; i < N; i++) check(sorted[i] == M'(ref_v[i]), "sorted array");
    end
    $display("N=%0d M=%0d: %0d sorts checked", N, M, ROUNDS);
    finished = 1;
  end
endmodule
