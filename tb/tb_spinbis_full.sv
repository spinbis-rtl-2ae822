`timescale 1ns/1ps
// tb_spinbis_full -- one complete target-locating inference on the system
// at its default size: 32 x 32 grid, 6144 terminals, 320 SBGs in 32 kinds
// of 10, and 128-bit bitstreams (128 SBG cycles, the stream length the
// source publication reports as sufficient on this grid).
// The host tasks compute the likelihoods for a target at cell (10, 21),
// load 6144 codes and 1024 conflict sets, configure the switch matrix and
// run 128 bits. Checks: configuration clocks, legality of all 6144
// connections, bit timing, every position's ratio of ones within 0.22 of
// the product of its quantised levels (5 standard deviations at 128 bits),
// and the target cell is the estimated location. Mechanisms counted:
// SBG sharing, distinct SBGs for equal values in a set, init discard.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_spinbis_full;
  import spinbis_pkg::*;
  localparam int GRID = GRID_DEF, L = L_PROB_DEF, PHI = PHI_DEF;
  localparam int NB = 128;
  localparam int NP = GRID * GRID, N = NP * 6, M = L * PHI;
  localparam int TW = $clog2(N), CAW = $clog2(N);
  localparam int TX = 10, TY = 21;             // target cell

  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_we, cs_we, start, busy, done, overflow, clash, run, bv;
  logic [TW-1:0] in_addr;
  logic [7:0] in_data;
  logic [CAW-1:0] cs_addr;
  cs_entry_t cs_data;
  logic [CAW:0] n_entries;
  logic [NP-1:0] r;

  spinbis_top dut (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .cs_we, .cs_addr, .cs_data, .n_entries,
    .start, .busy, .done, .overflow, .clash, .run, .bit_valid(bv), .r);

  `include "spinbis_tb_host.svh"

  initial begin
    int cyc, cnt [NP], n_share, n_sep, n_init, t_first;
    in_we = 0; cs_we = 0; start = 0; run = 0; in_addr = 0; in_data = 0; cs_addr = 0;
    cs_data = '0; n_entries = 0;
    repeat (3) @(posedge clk); #0.1 rst_n = 1;

    fusion_inputs(GRID, TX, TY);
    one_set_per_position();
    load_all();
    configure(cyc);
    chk(cyc == 2 * n_ent + 1, $sformatf("configuration clocks %0d", cyc));
    chk(!overflow && !clash, "clean configuration");
    check_connections(n_share, n_sep);
    infer(NB, cnt, t_first);
    n_init = (t_first == 21) ? 1 : 0;
    chk(n_init == 1, $sformatf("first bit at clock %0d", t_first));
    check_counts(NB, cnt, 0.22, TX, TY);

    $display("mechanisms: sbg_shared_rows=%0d distinct_equal_in_set=%0d init_discard=%0d",
             n_share, n_sep, n_init);
    chk(n_share > 0, "SBG sharing happened");
    chk(n_sep > 0, "equal values in one set got distinct SBGs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
