`timescale 1ns/1ps
// tb_mtj_cell -- checks the behavioural MTJ: switching ratio per write
// pulse against the set probability, both write directions, certain and
// impossible switching, no attempt with both or neither direction selected,
// and the resistance seen by the read circuit.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_mtj_cell;
  import spinbis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 3;
  localparam int unsigned PQ [NI] = '{16384, 65536, 0};   // 0.25, 1, 0
  logic        we, wrt1, rst0;
  logic [NI-1:0] ap;
  logic [15:0] r [NI];

  for (genvar i = 0; i < NI; i++) begin : g
    mtj_cell dut (
      .clk, .rst_n, .p_p2ap_q16(17'(PQ[i])), .p_ap2p_q16(17'(PQ[i])), .seed(32'(11 + i)), .write_en(we), .wrt1, .rst0, .ap(ap[i]), .r_ohm(r[i]));
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one write pulse of 7 cycles with the given direction
  task automatic pulse(bit w1, bit r0);
    wrt1 = w1; rst0 = r0; we = 1;
    repeat (7) @(posedge clk);
    #0.1 we = 0;
    repeat (2) @(posedge clk);
    #0.1;
  endtask

  initial begin
    int unsigned sw, tries;
    logic prev;
    we = 0; wrt1 = 0; rst0 = 0;
    repeat (3) @(posedge clk); #0.1 rst_n = 1;
    // resistance matches the state
    for (int i = 0; i < NI; i++)
      chk(r[i] == (ap[i] ? 16'(R_AP_OHM) : 16'(R_P_OHM)), "resistance");
    // p = 0.25, P -> AP: drive to P with Rst.0 until P, then count Wrt.1 successes
    sw = 0; tries = 0;
    for (int n = 0; n < 2000; n++) begin
      while (ap[0]) pulse(0, 1);
      pulse(1, 0);
      tries++; if (ap[0]) sw++;
    end
    chk(sw > tries * 20 / 100 && sw < tries * 30 / 100, $sformatf("P->AP ratio %0d/%0d", sw, tries));
    // p = 0.25, AP -> P
    sw = 0; tries = 0;
    for (int n = 0; n < 2000; n++) begin
      while (!ap[0]) pulse(1, 0);
      pulse(0, 1);
      tries++; if (!ap[0]) sw++;
    end
    chk(sw > tries * 20 / 100 && sw < tries * 30 / 100, $sformatf("AP->P ratio %0d/%0d", sw, tries));
    // p = 1 always switches, p = 0 never
    for (int n = 0; n < 50; n++) begin
      prev = ap[1]; pulse(!prev, prev); chk(ap[1] != prev, "p=1 switches");
    end
    for (int n = 0; n < 50; n++) begin
      prev = ap[2]; pulse(!prev, prev); chk(ap[2] == prev, "p=0 holds");
    end
    // both or neither direction: no change even at p = 1
    prev = ap[1]; pulse(1, 1); chk(ap[1] == prev, "both selected");
    prev = ap[1]; pulse(0, 0); chk(ap[1] == prev, "none selected");
    for (int i = 0; i < NI; i++)
      chk(r[i] == (ap[i] ? 16'(R_AP_OHM) : 16'(R_P_OHM)), "resistance end");
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
