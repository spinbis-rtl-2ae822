`timescale 1ns/1ps
// tb_sbg_phase_ctrl -- checks the SBG enable sequence clock by clock against
// the 7-write / 3-read layout (C_clk, T_clk, D_clk in read cycles 0, 1, 2),
// the initialising first cycle, one bit_valid per 10 clocks, and stop/restart.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_sbg_phase_ctrl;
  import spinbis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic run, bv;
  sbg_phase_t ph;
  sbg_phase_ctrl dut (.clk, .rst_n, .run, .ph, .bit_valid(bv));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic one_run(int ncyc);
    int last_bv, nbv;
    run = 1;
    @(posedge clk); #0.1;     // active from here
    last_bv = -1; nbv = 0;
    for (int c = 0; c < ncyc * 10; c++) begin
      int k;
      k = c % 10;
      chk(ph.write_en == (k < 7), "write_en");
      chk(ph.read_en  == (k >= 7), "read_en");
      chk(ph.c_clk == (k == 7), "c_clk");
      chk(ph.t_clk == (k == 8), "t_clk");
      chk(ph.d_clk == (k == 9), "d_clk");
      chk(ph.init == (c < 10), "init");
      if (bv) begin
        chk(c >= 20 && k == 0, "bit_valid position");
        if (last_bv >= 0) chk(c - last_bv == 10, "bit_valid period");
        last_bv = c; nbv++;
      end
      if (c == ncyc * 10 - 3) run = 0;   // drop mid-cycle: cycle completes
      @(posedge clk); #0.1;
    end
    chk(nbv == ncyc - 2, $sformatf("bit count %0d", nbv));
    chk(!ph.write_en && !ph.read_en, "idle after stop");
    repeat (5) begin @(posedge clk); #0.1; chk(!ph.write_en && !ph.read_en, "stays idle"); end
  endtask

  initial begin
    run = 0;
    repeat (3) @(posedge clk); #0.1 rst_n = 1;
    repeat (3) begin @(posedge clk); #0.1; chk(ph == sbg_phase_t'(6'b000001), "idle enables"); end
    one_run(6);
    one_run(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
