// unary_sorter -- comparison-free ascending-order unary sorter (top level).
//
// What it does: sorts N unsigned M-bit numbers into ascending order without
// any magnitude comparator. All inputs are turned in parallel into
// right-aligned unary streams (v ones, then zeros) by FSM-based generators;
// the stream that turns to 0 first belongs to the smallest value. Each such
// minimum is written to the sorted-data registers as soon as it is found, so
// the smallest results appear first.
//
// How it works: the sorting engine (N CFUNG lanes + smallest element
// detector) advances one unary bit per cycle while the controller is in
// "Find the index". When the detector flags one or more lanes (ds > 0) the
// controller stops the streams and, in "Put the results", writes the flagged
// lanes one per cycle, lowest lane first, at ascending output addresses. The
// written value is rebuilt by the MUX/Adder as register + Elapsed_Cycle - 1.
//
// Interface and timing: pulse (or hold) `start` while idle with `in_data`
// valid; the inputs are captured in that cycle. `wr_valid/wr_addr/wr_data`
// show each result as it is written; `sorted` holds all results
// (sorted[0] = smallest) and is complete when `done` pulses. A sort takes
// 1 + (Vmax + 1) + G + N cycles from start to done, where Vmax is the
// largest input and G the number of distinct input values. `ds`, the
// duplication sign `dup` (ds > 1) and `elapsed_cycle` are brought out for
// observation.
//
// Follows the paper: the block structure (engine, controller, MUX/Adder,
// output registers), the CFUNG lane and the first-0 detection. Own choices:
// the start/done handshake, the idle state and the result streaming port.
module unary_sorter
  import unary_sorter_pkg::*;
#(
  parameter int unsigned N = DEFAULT_N,
  parameter int unsigned M = DEFAULT_M,
  localparam int unsigned AW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned DSW = $clog2(N + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N-1:0][M-1:0] in_data,
  output logic                busy,
  output logic                done,
  output logic                wr_valid,
  output logic [AW-1:0]       wr_addr,
  output logic [M-1:0]        wr_data,
  output logic [DSW-1:0]      ds,
  output logic                dup,
  output logic [M:0]          elapsed_cycle,
  output logic [N-1:0][M-1:0] sorted
);

  ctrl_state_t         state;
  logic                load, enable, cnten, clr;
  logic [N-1:0][M-1:0] regs;
  logic [N-1:0]        ubits, hit;
  logic [AW-1:0]       min_addr;

  sorting_engine #(.N(N), .M(M)) u_engine (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (load),
    .values (in_data),
    .en     (enable),
    .clr    (clr),
    .regs   (regs),
    .ubits  (ubits),
    .hit    (hit),
    .addr   (min_addr),
    .ds     (ds),
    .dup    (dup)
  );

  controller #(.N(N), .M(M)) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .ds            (ds),
    .state         (state),
    .load          (load),
    .enable        (enable),
    .cnten         (cnten),
    .clr           (clr),
    .wr_en         (wr_valid),
    .wr_addr       (wr_addr),
    .elapsed_cycle (elapsed_cycle),
    .busy          (busy),
    .done          (done)
  );

  mux_adder #(.N(N), .M(M)) u_mux_adder (
    .regs          (regs),
    .addr          (min_addr),
    .elapsed_cycle (elapsed_cycle),
    .data          (wr_data)
  );

  sorted_data #(.N(N), .M(M)) u_out (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (wr_valid),
    .addr  (wr_addr),
    .data  (wr_data),
    .q     (sorted)
  );

endmodule
