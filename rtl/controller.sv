// controller -- sequencing of the unary sorter.
//
// What it does: alternates between letting the unary streams advance until
// the detector flags a minimum ("Find the index") and writing the flagged
// values out one per cycle ("Put the results"), until all N inputs are
// written. It also counts the enabled cycles (Elapsed_Cycle), from which the
// MUX/Adder recovers the binary value of a found minimum.
//
// How it works (structure of the published controller):
//   * FIND: Enable = 1 while ds == 0; the Elapsed_Cycle up counter counts
//     the enabled cycles. When ds > 0 the state moves to PUT. In that cycle
//     Enable is already 0 (Enable is gated by ds == 0), so the streams stop at
//     exactly the cycle the minimum was found; ds is latched.
//   * PUT: Enable = 0, CNTEN = 1. Each cycle one flagged value is written at
//     the output address, its flag is cleared, and the up counter X counts
//     the writes. Done = (X == ds) after the write returns to FIND.
//   * The down counter holds the number of values still to be written,
//     starting at N; the output address is N minus that count, so the first
//     minimum goes to address 0 and the output is in ascending order.
//   * IDLE (own addition): waits for `start`; after the last write the
//     controller returns here and pulses `done`.
//
// Interface and timing: `start` in IDLE produces `load` for one cycle (the
// lanes copy their inputs, all counters clear). `ds` comes combinationally
// from the detector. `wr_en`, `wr_addr` and `clr` are asserted together in
// each PUT cycle. A sort of N values whose largest value is Vmax and which
// has G distinct values takes 1 + (Vmax + 1) + G + N cycles from the cycle
// `start` is seen to the cycle `done` is high.
//
// Own choices: the IDLE state, the start/done handshake, the Mealy gating
// of Enable by ds == 0, the ds latch for the X == ds comparison and the
// meaning given to the down counter.
module controller
  import unary_sorter_pkg::*;
#(
  parameter int unsigned N = DEFAULT_N,
  parameter int unsigned M = DEFAULT_M,
  localparam int unsigned AW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned DSW = $clog2(N + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [DSW-1:0] ds,
  output ctrl_state_t    state,
  output logic           load,
  output logic           enable,
  output logic           cnten,
  output logic           clr,
  output logic           wr_en,
  output logic [AW-1:0]  wr_addr,
  output logic [M:0]     elapsed_cycle,
  output logic           busy,
  output logic           done
);

  logic [DSW-1:0] x_cnt;      // up counter X: writes in this PUT phase
  logic [DSW-1:0] ds_lat;     // ds captured on entry to PUT
  logic [DSW-1:0] remaining;  // down counter: values not yet written
  logic           x_eq_ds;    // Done of the published controller

  always_comb begin
    load    = (state == ST_IDLE) && start;
    enable  = (state == ST_FIND) && (ds == '0);
    cnten   = (state == ST_PUT);
    clr     = cnten;
    wr_en   = cnten;
    wr_addr = AW'(DSW'(N) - remaining);
    x_eq_ds = (x_cnt + DSW'(1)) == ds_lat;
    busy    = (state != ST_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= ST_IDLE;
      x_cnt         <= '0;
      ds_lat        <= '0;
      remaining     <= '0;
      elapsed_cycle <= '0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: begin
          if (start) begin
            state         <= ST_FIND;
            x_cnt         <= '0;
            ds_lat        <= '0;
            remaining     <= DSW'(N);
            elapsed_cycle <= '0;
          end
        end
        ST_FIND: begin
          if (enable) begin
            elapsed_cycle <= elapsed_cycle + 1'b1;
          end else begin
            state  <= ST_PUT;
            ds_lat <= ds;
            x_cnt  <= '0;
          end
        end
        ST_PUT: begin
          x_cnt     <= x_cnt + 1'b1;
          remaining <= remaining - 1'b1;
          if (x_eq_ds) begin
            if (remaining == DSW'(1)) begin
              state <= ST_IDLE;
              done  <= 1'b1;
            end else begin
              state <= ST_FIND;
            end
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // Handshake rules: a PUT cycle always has a flagged value to write, the
  // number written never exceeds what the detector reported, and nothing is
  // written past N values.
  a_put_has_flag: assert property (@(posedge clk) disable iff (!rst_n)
    state == ST_PUT |-> ds != '0)
    else $error("controller: PUT cycle with ds == 0");
  a_put_within_ds: assert property (@(posedge clk) disable iff (!rst_n)
    state == ST_PUT |-> x_cnt < ds_lat)
    else $error("controller: more writes than ds");
  a_put_within_n: assert property (@(posedge clk) disable iff (!rst_n)
    state == ST_PUT |-> remaining != '0)
    else $error("controller: write past N values");

endmodule
