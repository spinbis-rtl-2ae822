`timescale 1ns/1ps
// tb_switch_matrix -- random crosspoint settings and bitstream rows: every
// column must equal the row its single ON switch selects, 0 with none on;
// rows shared by several columns are exercised.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_switch_matrix;
  int checks = 0, failures = 0;
  localparam int M = 20, N = 37, RW = $clog2(M);
  logic [M-1:0] bs;
  logic [RW-1:0] sel [N];
  logic [N-1:0] v, o;
  switch_matrix #(.M(M), .N(N)) dut (.bs, .sel, .sel_valid(v), .o);
  initial begin
    for (int t = 0; t < 300; t++) begin
      bs = M'({$urandom, $urandom});
      for (int k = 0; k < N; k++) begin
        sel[k] = RW'($urandom_range(0, (t % 3 == 0) ? 2 : M - 1));  // many shared rows
        v[k]   = ($urandom_range(0, 9) != 0);
      end
      #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (o[k] !== (v[k] ? bs[sel[k]] : 1'b0)) begin
          failures++; $display("FAIL t=%0d k=%0d", t, k);
        end
      end
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
