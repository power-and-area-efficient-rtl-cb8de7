// mux_adder -- recovers the binary value of the minimum being written out.
//
// What it does: selects the input register of the lane at `addr` (the MUX)
// and adds Elapsed_Cycle - 1 to it (the adder). A lane flagged as minimum
// has counted its register down to 0 while emitting its ones, and it was
// flagged after Elapsed_Cycle enabled cycles, i.e. one cycle after its last
// 1; so register + Elapsed_Cycle - 1 is the value originally loaded.
//
// Interface and timing: purely combinational; `data` is valid in the same
// cycle as `addr`. Elapsed_Cycle - 1 is truncated to M bits (a found value is
// at most 2^M - 1, found when Elapsed_Cycle = 2^M). Follows the paper's MUX/Adder; the widths are this design's.
module mux_adder #(
  parameter int unsigned N = unary_sorter_pkg::DEFAULT_N,
  parameter int unsigned M = unary_sorter_pkg::DEFAULT_M,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][M-1:0] regs,
  input  logic [AW-1:0]       addr,
  input  logic [M:0]          elapsed_cycle,
  output logic [M-1:0]        data
);

  logic [M:0] offset;

  always_comb begin
    offset = elapsed_cycle - 1'b1;
    data   = regs[addr] + offset[M-1:0];
  end

endmodule
