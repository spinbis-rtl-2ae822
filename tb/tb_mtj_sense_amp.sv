`timescale 1ns/1ps
// tb_mtj_sense_amp -- checks the read circuit model: output 1 exactly when
// the data resistance is above the reference cell (R_P+R_AP)/2, sampled
// only when Read En. and C_clk are both high, held otherwise.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_mtj_sense_amp;
  import spinbis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic read_en, c_clk, q;
  logic [15:0] r;
  mtj_sense_amp dut (.clk, .rst_n, .read_en, .c_clk, .r_data(r), .mtj_state(q));

  initial begin
    int unsigned rref;
    logic exp_q;
    rref = (R_P_OHM + R_AP_OHM) / 2;
    read_en = 0; c_clk = 0; r = 0;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    exp_q = 0;
    for (int n = 0; n < 400; n++) begin
      case (n % 4)
        0: r = 16'(R_P_OHM);
        1: r = 16'(R_AP_OHM);
        default: r = 16'(rref - 200 + $urandom_range(0, 400));
      endcase
      read_en = 1'($urandom_range(0, 1));
      c_clk   = 1'($urandom_range(0, 1));
      @(posedge clk); #0.1;
      if (read_en && c_clk) exp_q = (32'(r) > rref);
      checks++;
      if (q !== exp_q) begin
        failures++;
        $display("FAIL n=%0d r=%0d en=%b c=%b q=%b exp=%b", n, r, read_en, c_clk, q, exp_q);
      end
    end
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
