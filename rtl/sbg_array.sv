`timescale 1ns/1ps
// sbg_array -- pre-built array of M SBGs (contains behavioural SBG models).
//
// The array provides L kinds of probability. Kind i (0-based) is made by
// PHI SBGs j = i*PHI .. i*PHI+PHI-1 that all switch with probability
// p_i = i / (L-1) but, having different seeds, produce different
// bitstreams; M = L * PHI. Several SBGs per kind let terminals that are
// combined by one gate (a conflict set) receive independent streams of the
// same value. In the source publication the probability of each SBG is
// fixed at design time by an on-chip voltage divider; here it is a
// parameter of each instance. The level values i/(L-1) and equal set sizes
// are this design's choice. All SBGs share one phase controller and run in
// lockstep.
//
// Interface: run starts/stops generation; bs[j] is SBG j's stream, valid
// from the first bit_valid pulse and updated once per SBG cycle.
module sbg_array
  import spinbis_pkg::*;
#(
  parameter int unsigned L         = L_PROB_DEF,
  parameter int unsigned PHI       = PHI_DEF,
  parameter int unsigned M         = L * PHI,
  parameter int unsigned WRITE_CYC = WRITE_CYC_DEF,
  parameter int unsigned READ_CYC  = READ_CYC_DEF,
  parameter int unsigned SEED_BASE = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         run,
  output logic [M-1:0] bs,
  output logic         bit_valid
);

  sbg_phase_t ph;

  sbg_phase_ctrl #(.WRITE_CYC(WRITE_CYC), .READ_CYC(READ_CYC)) u_ph (
    .clk, .rst_n, .run, .ph, .bit_valid
  );

  for (genvar j = 0; j < M; j++) begin : g_sbg
    sbg u_sbg (
      .clk, .rst_n,
      .p_q16(17'(level_q16(j / PHI, L))),
      .seed(32'(SEED_BASE + j * 7919)),
      .ph, .bit_out(bs[j])
    );
  end

  initial assert (M == L * PHI) else $error("sbg_array: M must equal L*PHI");

endmodule
