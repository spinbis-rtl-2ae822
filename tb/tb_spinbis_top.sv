`timescale 1ns/1ps
// tb_spinbis_top -- end-to-end target locating on a reduced system
// (4 x 4 grid, 8 probability kinds x 6 SBGs).
//
// The testbench plays the host: it computes the six likelihoods of every
// grid position for a target at a cell centre (Gaussian in distance with
// sigma = 5 + d/10, Gaussian in bearing with sigma = 14.0626 degrees, each
// scaled to peak 1 so that products stay representable), writes them as
// 8-bit codes, writes one conflict set per position, configures the switch
// matrix and runs NB stochastic bits. Checks:
//   * configuration takes 2*E+1 clocks; the connection of every terminal is
//     legal (right kind, no shared SBG inside a position);
//   * first bit 21 clocks after run (1 to start, 10 dropped init cycle, 10 for bit 1), then one bit per 10 clocks;
//   * each position's ratio of ones is within 0.12 of the product of its
//     six quantised levels, and the target cell (all six levels 1) gives
//     all ones and the maximum count;
//   * a second configuration overflows a kind, a third one clashes.
// Each mechanism is counted and must occur: SBG sharing between positions,
// distinct SBGs for equal values inside a set, init-cycle discard,
// overflow, clash.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_spinbis_top;
  import spinbis_pkg::*;
  localparam int GRID = 4, L = 8, PHI = 6;
  localparam int NB = 256;
  localparam int NP = GRID * GRID, N = NP * 6, M = L * PHI;
  localparam int TW = $clog2(N), CAW = $clog2(N);
  localparam int TX = 1, TY = 2;             // target cell

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

  spinbis_top #(.GRID(GRID), .L(L), .PHI(PHI)) dut (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .cs_we, .cs_addr, .cs_data, .n_entries,
    .start, .busy, .done, .overflow, .clash, .run, .bit_valid(bv), .r);

  `include "spinbis_tb_host.svh"

  initial begin
    int cyc, cnt [NP], n_share, n_sep, n_init, n_ovf, n_clash, t_first;
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
    check_counts(NB, cnt, 0.12, TX, TY);

    // overflow: one set of PHI+1 terminals of one value
    for (int t = 0; t < N; t++) code[t] = 200;
    n_ent = PHI + 1;
    for (int e = 0; e < n_ent; e++) begin ent_term[e] = e; ent_last[e] = (e == n_ent - 1); end
    load_all();
    configure(cyc);
    n_ovf = overflow;
    // clash: {t0,t2} {t1,t3} {t0,t1} with t0, t1 equal
    code[0] = 100; code[1] = 100; code[2] = 10; code[3] = 250;
    n_ent = 6;
    ent_term[0:5] = '{0, 2, 1, 3, 0, 1};
    ent_last[0:5] = '{0, 1, 0, 1, 0, 1};
    load_all();
    configure(cyc);
    n_clash = clash;
    chk(!overflow, "no overflow in clash case");

    $display("mechanisms: sbg_shared_rows=%0d distinct_equal_in_set=%0d init_discard=%0d overflow=%0d clash=%0d",
             n_share, n_sep, n_init, n_ovf, n_clash);
    chk(n_share > 0, "SBG sharing happened");
    chk(n_sep > 0, "equal values in one set got distinct SBGs");
    chk(n_ovf > 0, "overflow happened");
    chk(n_clash > 0, "clash happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
