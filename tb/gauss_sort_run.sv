// gauss_sort_run -- one evaluation run of the unary sorter on Gaussian data.
//
// Instantiates the sorter with N = 128 inputs of M bits and sorts four data
// sets drawn from N(mu, 0.3^2) for mu = 0.1, 0.2, 0.4, 0.5, the
// distributions of the published cycle-count evaluation. Samples outside
// [0, 1) are drawn again, and a kept sample x becomes the M-bit integer
// floor(x * 2^M) (this mapping is the testbench's own choice). Normal samples
// come from the Box-Muller transform of $urandom values.
//
// For each data set it checks every streamed result against the sorted
// input list, checks that the n-th minimum is found after exactly
// (value + 1) stream cycles (Elapsed_Cycle at the write), and prints the
// number of stream cycles needed to find the 1st, 32nd, 64th, 96th and
// 128th minimum -- the quantity plotted against the number of sorted inputs
// in the evaluation. Reports its counts on `checks`/`failures` and raises
// `finished` when all four data sets are done.
module gauss_sort_run #(
  parameter int unsigned M = 5
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned N   = 128;
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned DSW = $clog2(N + 1);
  localparam real PI = 3.14159265358979;

  logic start, busy, done, wr_valid, dup;
  logic [N-1:0][M-1:0] in_data, sorted;
  logic [AW-1:0] wr_addr;
  logic [M-1:0] wr_data;
  logic [DSW-1:0] ds;
  logic [M:0] elapsed_cycle;

  unary_sorter #(.N(N), .M(M)) dut (.clk, .rst_n, .start, .in_data, .busy, .done,
    .wr_valid, .wr_addr, .wr_data, .ds, .dup, .elapsed_cycle, .sorted);

  function automatic real urand01();
    return (real'($urandom_range(1, 1000000))) / 1000001.0;
  endfunction

  function automatic int unsigned gauss_sample(input real mu, input real sigma);
    real z, x;
    do begin
      z = $sqrt(-2.0 * $ln(urand01())) * $cos(2.0 * PI * urand01());
      x = mu + sigma * z;
    end while (x < 0.0 || x >= 1.0);
    return int'($floor(x * real'(1 << M)));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL (M=%0d): %s", M, what);
    end
  endtask

  initial begin
    real mus[4] = '{0.1, 0.2, 0.4, 0.5};
    int unsigned ref_v[$], nwr, cyc[N];
    checks = 0; failures = 0; finished = 0; start = 0; in_data = '0;
    @(posedge rst_n);
    foreach (mus[k]) begin
      ref_v.delete();
      for (int i = 0; i < N; i++) begin
        in_data[i] = M'(gauss_sample(mus[k], 0.3));
        ref_v.push_back(in_data[i]);
      end
      ref_v.sort();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      nwr = 0;
      while (!done) begin
        if (wr_valid) begin
          check(wr_data == M'(ref_v[nwr]), $sformatf("mu=%0.1f result #%0d = %0d, expected %0d", mus[k], nwr, wr_data, ref_v[nwr]));
          check(int'(elapsed_cycle) == ref_v[nwr] + 1, "minimum found after value + 1 cycles");
          cyc[nwr] = elapsed_cycle;
          nwr++;
        end
        @(negedge clk);
      end
      check(nwr == N, "all results written");
      for (int i = 0; i < N; i++) check(sorted[i] == M'(ref_v[i]), "sorted array");
      $display("M=%0d mu=%0.1f sigma=0.3: cycles to find minimum #1=%0d #32=%0d #64=%0d #96=%0d #128=%0d",
               M, mus[k], cyc[0], cyc[31], cyc[63], cyc[95], cyc[127]);
    end
    finished = 1;
  end
endmodule
