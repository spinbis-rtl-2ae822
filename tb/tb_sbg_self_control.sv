`timescale 1ns/1ps
// tb_sbg_self_control -- drives random MTJ states through the TG/DFF/XOR
// circuit with the standard enable sequence and compares bit_out, Wrt.1 and
// Rst.0 with a reference: bit = state now XOR state read one SBG cycle ago,
// Rst.0 = stored state, Wrt.1 = its inverse, no bit in the init cycle.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_sbg_self_control;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic t_clk, d_clk, init, st, wrt1, rst0, b;
  sbg_self_control dut (.clk, .rst_n, .t_clk, .d_clk, .init, .mtj_state(st), .wrt1, .rst0, .bit_out(b));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    logic last, cur, exp_b;
    t_clk = 0; d_clk = 0; init = 1; st = 0;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    chk(rst0 == 1 && wrt1 == 0, "reset: stored AP, first write is AP->P");
    last = 1; exp_b = 0;
    for (int cyc = 0; cyc < 300; cyc++) begin
      init = (cyc == 0);
      cur  = 1'($urandom_range(0, 1));
      // write cycles: state may change, outputs must hold
      repeat (7) begin
        st = 1'($urandom_range(0, 1));
        @(posedge clk); #0.1;
        chk(rst0 == last && wrt1 == !last && b == exp_b, "hold during write");
      end
      st = cur;                       // state settles for the read window
      @(posedge clk); #0.1;           // c_clk cycle (not used here)
      t_clk = 1; @(posedge clk); #0.1; t_clk = 0;
      st = !cur;                      // TG closed: later changes must not matter
      d_clk = 1; @(posedge clk); #0.1; d_clk = 0;
      if (!init) exp_b = cur ^ last;
      last = cur;
      chk(b == exp_b, $sformatf("bit cyc %0d", cyc));
      chk(rst0 == last && wrt1 == !last, "write direction");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
