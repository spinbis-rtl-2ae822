`timescale 1ns/1ps
// df_sc_logic -- stochastic logic of the target-locating (sensor fusion)
// application.
//
// Three sensors each report a distance and a bearing. For a candidate grid
// position the posterior is proportional to the product of six likelihoods
// p(d_i|x,y), p(b_i|x,y), i = 1..3. In stochastic computing a product of
// independent bitstreams is an AND, so every position has a chain of five
// 2-input AND gates over its six terminals, and all positions are computed
// in parallel. The fraction of ones in r[p] over a run estimates the
// (unnormalised) posterior of position p. Terminal 6p+c belongs to
// position p; the order d1, b1, d2, b2, d3, b3 within a position is this
// design's choice. The six terminals of a position form one conflict set.
//
// Purely combinational.
module df_sc_logic
  import spinbis_pkg::*;
#(
  parameter int unsigned N_POS = GRID_DEF * GRID_DEF,
  parameter int unsigned TERMS = TERMS_PER_POS
) (
  input  logic [N_POS*TERMS-1:0] t,
  output logic [N_POS-1:0]       r
);

  for (genvar p = 0; p < N_POS; p++) begin : g_pos
    logic [TERMS-1:0] chain;   // chain[c] = t0 & ... & tc
    assign chain[0] = t[p*TERMS];
    for (genvar c = 1; c < TERMS; c++) begin : g_and
      assign chain[c] = chain[c-1] & t[p*TERMS + c];
    end
    assign r[p] = chain[TERMS-1];
  end

endmodule
