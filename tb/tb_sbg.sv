`timescale 1ns/1ps
// tb_sbg -- runs complete SBGs (MTJ model, sense amplifier, self-control)
// from a phase controller and checks: one bit per 10 clocks after the init
// cycle, ratio of ones close to the set probability for p = 0.3 and 0.7,
// all zeros for p = 0, all ones for p = 1, and that every 1 bit corresponds
// to an MTJ state change (the self-control rule).
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_sbg;
  import spinbis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run, bv;
  sbg_phase_t ph;
  sbg_phase_ctrl u_ph (.clk, .rst_n, .run, .ph, .bit_valid(bv));
  localparam int NI = 4;
  localparam int unsigned PQ [NI] = '{19661, 45875, 0, 65536};   // 0.3 0.7 0 1
  logic [NI-1:0] b;
  for (genvar i = 0; i < NI; i++) begin : g
    sbg dut (.clk, .rst_n, .p_q16(17'(PQ[i])), .seed(32'(100 + i)), .ph, .bit_out(b[i]));
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int NB = 1000;
  initial begin
    int ones [NI];
    int nb, t0, tprev;
    logic prev_ap;
    foreach (ones[i]) ones[i] = 0;
    run = 0;
    repeat (3) @(posedge clk); #0.1 rst_n = 1;
    run = 1; t0 = 0; nb = 0; tprev = -1;
    for (int c = 0; nb < NB; c++) begin
      @(posedge clk); #0.1;
      if (bv) begin
        if (nb == 0) chk(c == 20, $sformatf("first bit after init cycle (c=%0d)", c));
        else         chk(c - tprev == 10, "one bit per 10 clocks");
        tprev = c;
        nb++;
        for (int i = 0; i < NI; i++) ones[i] += b[i];
        // self-control rule on instance 0: bit = change of the read state
        chk(b[0] == (g[0].dut.u_sc.current_state ^ prev_ap) || nb == 1, "bit = state change");
      end
      if (ph.t_clk) prev_ap = g[0].dut.u_sc.last_state;
    end
    chk(ones[0] > NB * 26 / 100 && ones[0] < NB * 34 / 100, $sformatf("p=0.3 ones %0d", ones[0]));
    chk(ones[1] > NB * 66 / 100 && ones[1] < NB * 74 / 100, $sformatf("p=0.7 ones %0d", ones[1]));
    chk(ones[2] == 0,  $sformatf("p=0 ones %0d", ones[2]));
    chk(ones[3] == NB, $sformatf("p=1 ones %0d", ones[3]));
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
