`timescale 1ns/1ps
// spinbis_pkg -- constants and types shared by the SPINBIS blocks.
//
// SPINBIS generates stochastic bitstreams with magnetic tunnel junctions
// (MTJs) and routes them through a crossbar to AND-gate stochastic logic.
// The numbers below are the defaults of that system for a 32x32
// target-locating problem: 320 stochastic bitstream generators (SBGs) and
// 6 likelihood terminals per grid position, both from the source
// publication. The split of the 320 SBGs into 32 probability kinds of 10
// SBGs each, the 8-bit probability code and the 1 ns clock are this
// design's own choices.
//
// Timing: one stochastic bit takes one 10 ns SBG cycle, split into a 7 ns
// write pulse and a 3 ns read window. With a 1 ns clock that is 7 + 3
// clock cycles per bit.
package spinbis_pkg;

  // ---- system sizes -------------------------------------------------------
  parameter int unsigned GRID_DEF          = 32;   // grid is GRID x GRID
  parameter int unsigned TERMS_PER_POS     = 6;    // d1 b1 d2 b2 d3 b3
  parameter int unsigned M_SBG_DEF         = 320;  // SBGs in the array
  parameter int unsigned L_PROB_DEF        = 32;   // probability kinds
  parameter int unsigned PHI_DEF           = 10;   // SBGs per kind
  parameter int unsigned PROB_W            = 8;    // digital input width

  // ---- SBG cycle ----------------------------------------------------------
  parameter int unsigned WRITE_CYC_DEF     = 7;    // Write En. high (cycles)
  parameter int unsigned READ_CYC_DEF      = 3;    // Read En. high (cycles)

  // ---- MTJ electrical model (45 nm x 45 nm, RA = 5 Ohm.um^2, TMR = 1.5) ----
  parameter int unsigned R_P_OHM           = 2469; // 5 / (0.045 * 0.045)
  parameter int unsigned R_AP_OHM          = 6173; // R_P * (1 + TMR)

  // Probability in Q16: 65536 means certain switching.
  parameter int unsigned Q16_ONE           = 65536;

  // Enables that one phase controller broadcasts to every SBG.
  typedef struct packed {
    logic write_en;  // write circuit drives the MTJ (Table: Write En.)
    logic read_en;   // read circuit connected (Read En.)
    logic c_clk;     // comparator samples at the end of this cycle
    logic t_clk;     // transmission gate passes the comparator output
    logic d_clk;     // DFF captures current_state, output bit updates
    logic init;      // this SBG cycle only initialises; its bit is dropped
  } sbg_phase_t;

  // One conflict-set memory entry.
  typedef struct packed {
    logic        last;   // final terminal of its conflict set
    logic [15:0] term;   // terminal (switch-matrix column) index
  } cs_entry_t;

  // Probability level of kind i out of l kinds, in Q16: i / (l-1).
  function automatic int unsigned level_q16(int unsigned i, int unsigned l);
    if (l < 2) return Q16_ONE / 2;
    return (i * Q16_ONE + (l - 1) / 2) / (l - 1);
  endfunction

endpackage
