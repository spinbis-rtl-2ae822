`timescale 1ns/1ps
// spinbis_top -- stochastic-computing Bayesian inference engine for the
// target-locating problem (default: 32 x 32 grid, 320 SBGs).
//
// Data path:  sbg_array --bs[M]--> switch_matrix --T[N]--> df_sc_logic --> r
// Control:    host -> digital inputs + conflict sets -> switch_controller
//             -> crosspoint controls of switch_matrix
//
// Operation:
//   1. While idle, the host writes one 8-bit probability code per terminal
//      (in_we/in_addr/in_data) and the conflict-set list
//      (cs_we/cs_addr/cs_data, n_entries entries).
//   2. A `start` pulse lets the switch controller connect every terminal
//      to an SBG of the nearest probability kind, never giving two members
//      of one conflict set the same SBG; `done` pulses when finished
//      (2 * n_entries + 1 clocks), `overflow` reports a set that needed
//      more SBGs of one kind than the array has, `clash` a set holding two
//      terminals that earlier sets had already given one SBG.
//   3. With `run` high the SBGs produce one bit per SBG cycle (10 clocks by
//      default) after one initialising cycle; each `bit_valid` pulse marks a
//      new bit on r[p] for every grid position p. Counting the ones of r[p]
//      over n bits estimates the unnormalised posterior of position p; the
//      position with the most ones is the estimated target location.
// The SBGs are behavioural models of MTJ circuits; everything else is
// synthesizable. Terminal clustering, which would merge terminals into
// fewer switch-matrix columns, is not implemented: the matrix has one
// column per terminal.
//
// Source vs own choice: the block structure, M = 320, N = 6144 and the
// five-AND chain per position follow the publication; the host interface,
// the 32 x 10 split of the SBGs, the clash/overflow flags and leaving output
// counting to the user are this design's choices.
module spinbis_top
  import spinbis_pkg::*;
#(
  parameter int unsigned GRID      = GRID_DEF,
  parameter int unsigned L         = L_PROB_DEF,
  parameter int unsigned PHI       = PHI_DEF,
  parameter int unsigned WRITE_CYC = WRITE_CYC_DEF,
  parameter int unsigned READ_CYC  = READ_CYC_DEF,
  // derived
  parameter int unsigned M         = L * PHI,
  parameter int unsigned N_POS     = GRID * GRID,
  parameter int unsigned N         = N_POS * TERMS_PER_POS,
  parameter int unsigned CS_DEPTH  = N,
  parameter int unsigned TW        = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CAW       = (CS_DEPTH > 1) ? $clog2(CS_DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // digital inputs (host)
  input  logic              in_we,
  input  logic [TW-1:0]     in_addr,
  input  logic [PROB_W-1:0] in_data,
  // conflict sets (host)
  input  logic              cs_we,
  input  logic [CAW-1:0]    cs_addr,
  input  cs_entry_t         cs_data,
  input  logic [CAW:0]      n_entries,
  // switch configuration
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              overflow,
  output logic              clash,
  // inference
  input  logic              run,
  output logic              bit_valid,
  output logic [N_POS-1:0]  r
);

  localparam int unsigned RW = (M > 1) ? $clog2(M) : 1;

  logic [M-1:0]  bs;
  logic [N-1:0]  t;
  logic [RW-1:0] sel [N];
  logic [N-1:0]  sel_valid;
  logic [CAW-1:0] cs_raddr;
  cs_entry_t     cs_rdata;

  sbg_array #(.L(L), .PHI(PHI), .M(M), .WRITE_CYC(WRITE_CYC), .READ_CYC(READ_CYC)) u_sbg (
    .clk, .rst_n, .run, .bs, .bit_valid
  );

  conflict_set_mem #(.DEPTH(CS_DEPTH), .AW(CAW)) u_cs (
    .clk, .we(cs_we), .waddr(cs_addr), .wdata(cs_data), .raddr(cs_raddr), .rdata(cs_rdata)
  );

  switch_controller #(.L(L), .PHI(PHI), .M(M), .N(N), .CS_DEPTH(CS_DEPTH),
                      .RW(RW), .TW(TW), .CAW(CAW)) u_ctrl (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .cs_raddr, .cs_rdata, .n_entries,
    .start, .busy, .done, .overflow, .clash, .sel, .sel_valid
  );

  switch_matrix #(.M(M), .N(N), .RW(RW)) u_xbar (
    .bs, .sel, .sel_valid, .o(t)
  );

  df_sc_logic #(.N_POS(N_POS), .TERMS(TERMS_PER_POS)) u_logic (
    .t, .r
  );

endmodule
