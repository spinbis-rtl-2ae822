`timescale 1ns/1ps
// tb_df_sc_logic -- random terminal patterns: each position's output must be
// the AND of its six terminals; also checks that AND-ing independent
// streams multiplies their probabilities.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_df_sc_logic;
  int checks = 0, failures = 0;
  localparam int NP = 10, T = 6;
  logic [NP*T-1:0] t;
  logic [NP-1:0] r;
  df_sc_logic #(.N_POS(NP), .TERMS(T)) dut (.t, .r);
  initial begin
    int ones;
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < NP * T; i++) t[i] = ($urandom_range(0, 7) != 0);  // mostly ones
      #1;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (r[p] !== &t[p*T +: T]) begin failures++; $display("FAIL n=%0d p=%0d", n, p); end
      end
    end
    // product: six streams of p = 0.875 -> 0.449
    ones = 0;
    for (int n = 0; n < 4000; n++) begin
      for (int i = 0; i < T; i++) t[i] = ($urandom_range(0, 7) != 0);
      #1 ones += r[0];
    end
    checks++;
    if (ones < 4000 * 42 / 100 || ones > 4000 * 48 / 100) begin
      failures++; $display("FAIL product %0d", ones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
