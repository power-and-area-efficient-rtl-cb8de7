// cfung -- one lane of the comparison-free unary number generator (CFUNG).
//
// What it does: turns the M-bit binary value held in its input register into
// a right-aligned unary bit-stream, i.e. `value` ones followed by zeros, one
// bit per enabled clock cycle, without a counter or a comparator.
//
// How it works (as in the published lane): every enabled cycle the register
// is replaced by (register - previous unary bit). The OR of all bits of that
// difference (out_or) is captured by a flip-flop and becomes the next unary
// bit. While the register is non-zero the stream is 1 and the register counts
// down by one; the cycle the difference reaches zero, out_or falls to 0 and
// the stream stays 0 from then on, because 0 - 0 = 0. The stream flip-flop is
// the two-state FSM: state 1 produces '1', state 0 produces '0', and the only
// transition is 1 -> 0 when out_or is 0. Example: value 4 gives the bits
// 1,1,1,1,0,0,... on the first, second, ... enabled cycle (written 00001111
// when the first bit is put on the right).
//
// Interface: `load` writes `value` into the register and clears the stream bit
// (so the first subtraction subtracts 0). `en` is the clock enable of both
// flip-flops (the controller's Enable). `out_or` is combinational from the
// register and the stream bit; the smallest-element detector uses it to flag
// the first 0 at the same edge at which the stream flip-flop captures it.
// `reg_q` is read by the MUX/Adder when the lane's value is written out.
//
// Own choices: the load port, the asynchronous active-low reset and the
// clearing of the stream bit on load are not described in the paper.
module cfung #(
  parameter int unsigned M = unary_sorter_pkg::DEFAULT_M
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [M-1:0] value,
  input  logic         en,
  output logic         out_or,
  output logic         ubit,
  output logic [M-1:0] reg_q
);

  logic [M-1:0] diff;

  // SUB: register minus the previously generated bit (zero-extended).
  always_comb begin
    diff   = reg_q - M'(ubit);
    out_or = |diff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_q <= '0;
      ubit  <= 1'b0;
    end else if (load) begin
      reg_q <= value;
      ubit  <= 1'b0;
    end else if (en) begin
      reg_q <= diff;
      ubit  <= out_or;
    end
  end

endmodule
