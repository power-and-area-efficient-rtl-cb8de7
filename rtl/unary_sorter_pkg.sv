// unary_sorter_pkg -- types and constants shared by the unary sorter.
//
// The controller has the two working states of the published controller
// ("Find the index" and "Put the results") plus an idle state that this
// implementation adds so that a sort has a defined start and end.
package unary_sorter_pkg;

  // Default sizes: the representative configuration of the evaluation,
  // N = 32 inputs of M = 16 bits.
  parameter int unsigned DEFAULT_N = 32;
  parameter int unsigned DEFAULT_M = 16;

  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,  // not sorting; waiting for start (own addition)
    ST_FIND = 2'd1,  // "Find the index": Enable = 1, unary streams advance
    ST_PUT  = 2'd2   // "Put the results": Enable = 0, CNTEN = 1
  } ctrl_state_t;

endpackage
