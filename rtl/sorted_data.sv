// sorted_data -- output registers Out1..OutN holding the sorted values.
//
// What it does: an N-entry, M-bit register file with one write port; the
// controller writes the minima into it in ascending order (address 0 first).
// All entries are visible at once on `q` (entry i is Out(i+1)).
//
// Interface and timing: synchronous write at the rising clock edge when
// `we` is high; asynchronous active-low reset clears all entries. The paper
// names the block only; the write port and reset are this design's own.
module sorted_data #(
  parameter int unsigned N = unary_sorter_pkg::DEFAULT_N,
  parameter int unsigned M = unary_sorter_pkg::DEFAULT_M,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [AW-1:0]       addr,
  input  logic [M-1:0]        data,
  output logic [N-1:0][M-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (we) begin
      q[addr] <= data;
    end
  end

endmodule
