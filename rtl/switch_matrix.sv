`timescale 1ns/1ps
// switch_matrix -- M x N crossbar between the SBG array and the logic.
//
// Row j carries bitstream bs[j] (input I_j), column k drives logic terminal
// T_k (output O_k). Each crosspoint is a pass transistor whose gate is the
// control bit C[j][k]; when it is on, the row is connected to the column.
// A column has at most one switch on, a row may have any number on, which is
// how one SBG feeds several terminals. The controller stores a column's
// control as a row index plus a valid bit; this module decodes it back into
// the column's control bits C[.][k] (a one-hot vector) and forms
// O_k = OR_j (C[j][k] AND bs[j]). A column with no switch on reads 0 (in the
// transistor circuit it would float); that is this design's choice.
//
// Purely combinational.
module switch_matrix
  import spinbis_pkg::*;
#(
  parameter int unsigned M  = M_SBG_DEF,
  parameter int unsigned N  = GRID_DEF * GRID_DEF * TERMS_PER_POS,
  parameter int unsigned RW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [M-1:0]  bs,
  input  logic [RW-1:0] sel [N],
  input  logic [N-1:0]  sel_valid,
  output logic [N-1:0]  o
);

  for (genvar k = 0; k < N; k++) begin : g_col
    logic [M-1:0] c_col;   // C[0..M-1][k]
    assign c_col = sel_valid[k] ? (M'(1) << sel[k]) : '0;
    assign o[k]  = |(c_col & bs);
  end

endmodule
