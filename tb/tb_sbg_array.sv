`timescale 1ns/1ps
// tb_sbg_array -- a small array (L = 4 kinds x PHI = 3): each SBG's ratio of
// ones matches its kind's level i/(L-1), and SBGs of the same kind are
// nearly uncorrelated (|SCC| small, SCC as defined for stochastic computing),
// so they can feed the same gate.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_sbg_array;
  import spinbis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 4, PHI = 3, M = L * PHI, NB = 1024;
  logic run, bv;
  logic [M-1:0] bs;
  sbg_array #(.L(L), .PHI(PHI)) dut (.clk, .rst_n, .run, .bs, .bit_valid(bv));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // stochastic computing correlation of two streams given overlap counts
  function automatic real scc(int a, int b, int c, int d);
    real num, den;
    int n;
    n = a + b + c + d;
    num = real'(a) * d - real'(b) * c;
    if (num > 0) den = real'(n) * ((a + b) < (a + c) ? (a + b) : (a + c)) - real'(a + b) * (a + c);
    else         den = real'(a + b) * (a + c) - real'(n) * ((a - d) > 0 ? (a - d) : 0);
    if (den == 0) return 0.0;
    return num / den;
  endfunction

  initial begin
    int ones [M];
    int ov [M][4];
    int nb;
    foreach (ones[i]) ones[i] = 0;
    foreach (ov[i, k]) ov[i][k] = 0;
    run = 0;
    repeat (3) @(posedge clk); #0.1 rst_n = 1;
    run = 1; nb = 0;
    while (nb < NB) begin
      @(posedge clk); #0.1;
      if (bv) begin
        nb++;
        for (int j = 0; j < M; j++) begin
          ones[j] += bs[j];
          // overlap with the next SBG of the same kind
          if (j % PHI != PHI - 1) ov[j][{bs[j], bs[j+1]}]++;
        end
      end
    end
    for (int j = 0; j < M; j++) begin
      real p, lvl;
      p = real'(ones[j]) / NB;
      lvl = real'(j / PHI) / (L - 1);
      chk(p > lvl - 0.05 && p < lvl + 0.05, $sformatf("SBG %0d ratio %f level %f", j, p, lvl));
      if (j % PHI != PHI - 1 && lvl > 0.0 && lvl < 1.0) begin
        real s;
        s = scc(ov[j][3], ov[j][2], ov[j][1], ov[j][0]);
        chk(s < 0.15 && s > -0.15, $sformatf("SCC(%0d,%0d) = %f", j, j + 1, s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
