// sorting_engine -- FSM-based sorting engine: N CFUNG lanes and the SED.
//
// What it does: holds the N inputs in the lanes' input registers, turns them
// all at once into right-aligned unary streams (one bit per enabled cycle)
// and, through the smallest element detector, reports in each cycle the lanes
// whose streams have just produced their first 0, i.e. the current minimum.
//
// How it works: every lane is a cfung instance sharing `load` and `en`; the
// lanes' out_or signals feed one sed instance. After k enabled cycles the
// lanes holding the value k-1 are flagged; their registers are then 0.
//
// Interface: `load` copies `values` into the lanes and clears the detector.
// `en` is the controller's Enable. `clr` clears the flag at `addr` once its
// value has been written out. `regs` exposes the lane registers to the
// MUX/Adder. Structure follows the published sorting engine; the port set is
// this design's own.
module sorting_engine #(
  parameter int unsigned N = unary_sorter_pkg::DEFAULT_N,
  parameter int unsigned M = unary_sorter_pkg::DEFAULT_M,
  localparam int unsigned AW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned DSW = $clog2(N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [N-1:0][M-1:0]   values,
  input  logic                  en,
  input  logic                  clr,
  output logic [N-1:0][M-1:0]   regs,
  output logic [N-1:0]          ubits,
  output logic [N-1:0]          hit,
  output logic [AW-1:0]         addr,
  output logic [DSW-1:0]        ds,
  output logic                  dup
);

  logic [N-1:0] out_or;

  for (genvar g = 0; g < N; g++) begin : g_lane
    cfung #(.M(M)) u_cfung (
      .clk    (clk),
      .rst_n  (rst_n),
      .load   (load),
      .value  (values[g]),
      .en     (en),
      .out_or (out_or[g]),
      .ubit   (ubits[g]),
      .reg_q  (regs[g])
    );
  end

  sed #(.N(N)) u_sed (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (load),
    .en     (en),
    .out_or (out_or),
    .clr    (clr),
    .hit    (hit),
    .addr   (addr),
    .ds     (ds),
    .dup    (dup)
  );

endmodule
