// pm_pkg: constants and types shared by the ensemble dynamic-power monitor.
//
// The monitor counts rising edges of a handful of selected application
// signals, cuts those counts into per-FSM-state features, runs one
// memory-based decision tree per cluster of states and averages the
// cycle-weighted tree outputs over an invocation.  This package holds the
// word widths every block agrees on and the state type of the tree walker.
//
// Following the paper: 20-bit activity counters, the four tree-walker states
// idle / node read / stall / result.  Own choices: 16-bit power result,
// 32-bit invocation length, 48-bit weighted accumulators (the width of a
// DSP48 accumulator), 8-bit binary state index.
package pm_pkg;

  // Activity counter and feature width (paper: "We uniformly set the width as 20 bits").
  localparam int unsigned CNT_W   = 20;
  // Leaf value (power estimate) width, in user-defined power units.
  localparam int unsigned RES_W   = 16;
  // Width of the cycle count of one state segment; matches CNT_W so a
  // feature can never wrap inside a segment.
  localparam int unsigned CYC_W   = 20;
  // Width of the invocation length T.
  localparam int unsigned T_W     = 32;
  // Width of the weighted sums p(c_i) and their total: T_W + RES_W.
  localparam int unsigned ACC_W   = 48;
  // Width of the application's (binary) state index.
  localparam int unsigned STATE_W = 8;

  // Decision tree walker states: idle, node read, stalling, result output.
  typedef enum logic [1:0] {
    DT_IDLE  = 2'd0,
    DT_NODE  = 2'd1,
    DT_STALL = 2'd2,
    DT_RES   = 2'd3
  } dt_state_e;

endpackage
