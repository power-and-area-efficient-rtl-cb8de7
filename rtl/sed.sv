// sed -- smallest element detector (SED) of the unary sorting engine.
//
// What it does: watches the N right-aligned unary streams while they are
// generated and flags every lane whose stream produces its first 0 -- in a
// right-aligned stream the lane(s) that turn to 0 first hold the minimum.
// It reports how many lanes are flagged (the detection signal ds, the output
// of the adder) and the address of one flagged lane (priority encoder), plus
// a duplication sign that is high when more than one lane is flagged.
//
// How it works: each lane has a "found" flip-flop and a "hit" flip-flop.
// In an enabled cycle, a lane that is not yet found and whose next unary bit
// (the CFUNG out_or) is 0 sets both, at the same edge at which its stream
// flip-flop captures that 0. A hit stays set while the controller writes the
// flagged values out; the controller clears one hit per cycle (`clr`), always
// the one at `addr`, so the priority encoder then moves to the next flagged
// lane. "found" never clears until the next load, so a lane whose stream has
// already ended is not detected again.
//
// Interface and timing: `load` clears all flags (start of a sort). `addr`,
// `ds` and `dup` are combinational from the hit flip-flops. The priority is
// lowest lane index first.
//
// Follows the paper: first-0 detection per lane, adder producing ds, a
// priority encoder with a duplication sign. Own choices: the separate
// found/hit flip-flops, the per-cycle clear and the lowest-index priority.
module sed #(
  parameter int unsigned N  = unary_sorter_pkg::DEFAULT_N,
  localparam int unsigned AW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned DSW = $clog2(N + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic           en,
  input  logic [N-1:0]   out_or,
  input  logic           clr,
  output logic [N-1:0]   hit,
  output logic [AW-1:0]  addr,
  output logic [DSW-1:0] ds,
  output logic           dup
);

  logic [N-1:0] found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      found <= '0;
      hit   <= '0;
    end else if (load) begin
      found <= '0;
      hit   <= '0;
    end else begin
      for (int unsigned i = 0; i < N; i++) begin
        if (en && !found[i] && !out_or[i]) begin
          found[i] <= 1'b1;
          hit[i]   <= 1'b1;
        end else if (clr && (AW'(i) == addr)) begin
          hit[i] <= 1'b0;
        end
      end
    end
  end

  // Priority encoder (lowest index wins) and adder (population count).
  always_comb begin
    addr = '0;
    ds   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (hit[i]) addr = AW'(i);
    end
    for (int unsigned i = 0; i < N; i++) begin
      ds = ds + DSW'(hit[i]);
    end
    dup = (ds > DSW'(1));
  end

endmodule
