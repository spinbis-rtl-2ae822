`timescale 1ns/1ps
// tb_conflict_set_mem -- writes random entries and reads them back in a
// different order against a reference array; unwritten-while-reading
// addresses keep their value.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_conflict_set_mem;
  import spinbis_pkg::*;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DEPTH = 96, AW = $clog2(DEPTH);
  logic we;
  logic [AW-1:0] wa, ra;
  cs_entry_t wd, rd;
  cs_entry_t ref_mem [DEPTH];
  conflict_set_mem #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));
  initial begin
    we = 0; wa = 0; ra = 0; wd = '0;
    @(posedge clk); #0.1;
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; wa = AW'(i); wd = cs_entry_t'($urandom); ref_mem[i] = wd;
      @(posedge clk); #0.1;
    end
    we = 0;
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < DEPTH; i++) begin
        ra = AW'((i * 37 + r) % DEPTH); #0.1;
        checks++;
        if (rd !== ref_mem[ra]) begin failures++; $display("FAIL addr %0d", ra); end
      end
    // overwrite half, check all
    for (int i = 0; i < DEPTH; i += 2) begin
      we = 1; wa = AW'(i); wd = cs_entry_t'($urandom); ref_mem[i] = wd;
      @(posedge clk); #0.1;
    end
    we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      ra = AW'(i); #0.1;
      checks++;
      if (rd !== ref_mem[i]) begin failures++; $display("FAIL addr %0d (2)", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
