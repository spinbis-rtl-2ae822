`timescale 1ns/1ps
// tb_switch_controller -- SBG sharing.
//  1. The nine-terminal example (sets {T1,T2,T5}, {T3,T4,T5}, {T6..T9},
//     probabilities p1 p2 p1 p3 p1 p4 p5 p3 p3): exactly 7 SBGs in use,
//     T1/T3 and T4/T8 share, T5 and T9 do not.
//  2. Random conflict sets, with terminals in several sets: the result must
//     equal an independent model of the assignment rule, be legal (one SBG
//     of the right kind per terminal, all different within each set), and
//     take 2*E+1 clocks; a set holding two terminals that earlier sets had
//     given one SBG raises clash (seen in some runs, not all).
//  3. A set with more same-kind terminals than PHI raises overflow.
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.
module tb_switch_controller;
  import spinbis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 8, PHI = 3, M = L * PHI, N = 40, CSD = 64;
  localparam int RW = $clog2(M), TW = $clog2(N), CAW = $clog2(CSD);
  localparam int MAXC = 255;

  logic in_we, start, busy, done, overflow, clash, cs_we;
  logic [TW-1:0] in_addr;
  logic [7:0] in_data;
  logic [CAW-1:0] cs_raddr, cs_wa;
  cs_entry_t cs_rdata, cs_wd;
  logic [CAW:0] n_entries;
  logic [RW-1:0] sel [N];
  logic [N-1:0] sel_valid;

  conflict_set_mem #(.DEPTH(CSD)) u_cs (.clk, .we(cs_we), .waddr(cs_wa), .wdata(cs_wd), .raddr(cs_raddr), .rdata(cs_rdata));
  switch_controller #(.L(L), .PHI(PHI), .N(N), .CS_DEPTH(CSD)) dut (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .cs_raddr, .cs_rdata, .n_entries,
    .start, .busy, .done, .overflow, .clash, .sel, .sel_valid);

  int code_of [N];
  int ent_term [CSD];
  bit ent_last [CSD];
  int n_ent;
  int n_clash = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int kind_of(int code);
    return (2 * code * (L - 1) + MAXC) / (2 * MAXC);   // nearest level
  endfunction

  task automatic load();
    for (int t = 0; t < N; t++) begin
      in_we = 1; in_addr = TW'(t); in_data = 8'(code_of[t]);
      @(posedge clk); #0.1;
    end
    in_we = 0;
    for (int e = 0; e < n_ent; e++) begin
      cs_we = 1; cs_wa = CAW'(e); cs_wd.term = 16'(ent_term[e]); cs_wd.last = ent_last[e];
      @(posedge clk); #0.1;
    end
    cs_we = 0;
    n_entries = (CAW+1)'(n_ent);
  endtask

  task automatic run_ctrl(output int cycles);
    start = 1; @(posedge clk); #0.1; start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); #0.1; cycles++; end
  endtask

  // independent model: returns expected row per terminal (-1 = none), overflow
  task automatic model(output int row [N], output bit ovf, output bit clsh);
    bit used [M];
    int s0;
    ovf = 0; clsh = 0;
    foreach (row[t]) row[t] = -1;
    s0 = 0;
    for (int e = 0; e < n_ent; e++) begin
      if (ent_last[e] || e == n_ent - 1) begin
        foreach (used[j]) used[j] = 0;
        for (int f = s0; f <= e; f++)
          if (row[ent_term[f]] >= 0) begin
            if (used[row[ent_term[f]]]) clsh = 1;
            used[row[ent_term[f]]] = 1;
          end
        for (int f = s0; f <= e; f++) begin
          int t, k;
          bit got;
          t = ent_term[f];
          if (row[t] >= 0) continue;
          k = kind_of(code_of[t]);
          got = 0;
          for (int i = 0; i < PHI && !got; i++)
            if (!used[k * PHI + i]) begin row[t] = k * PHI + i; used[k * PHI + i] = 1; got = 1; end
          if (!got) ovf = 1;
        end
        s0 = e + 1;
      end
    end
  endtask

  task automatic compare_with_model(string tag);
    int row [N];
    bit ovf, clsh;
    model(row, ovf, clsh);
    chk(overflow == ovf, {tag, " overflow flag"});
    chk(clash == clsh, {tag, " clash flag"});
    if (clsh) n_clash++;
    for (int t = 0; t < N; t++) begin
      if (row[t] < 0) chk(!sel_valid[t], $sformatf("%s t%0d unconnected", tag, t));
      else chk(sel_valid[t] && int'(sel[t]) == row[t],
               $sformatf("%s t%0d row %0d exp %0d", tag, t, sel[t], row[t]));
    end
  endtask

  // legality of a result; only meaningful when no clash was reported
  task automatic check_legal(string tag);
    int s0;
    if (clash) return;
    s0 = 0;
    for (int e = 0; e < n_ent; e++) begin
      int t;
      t = ent_term[e];
      if (sel_valid[t]) chk(int'(sel[t]) / PHI == kind_of(code_of[t]), {tag, " kind"});
      if (ent_last[e] || e == n_ent - 1) begin
        for (int a = s0; a <= e; a++)
          for (int b = a + 1; b <= e; b++)
            if (ent_term[a] != ent_term[b] && sel_valid[ent_term[a]] && sel_valid[ent_term[b]])
              chk(sel[ent_term[a]] != sel[ent_term[b]], {tag, " conflict set shares an SBG"});
        s0 = e + 1;
      end
    end
  endtask

  initial begin
    int cyc, nused;
    bit rowused [M];
    int pk [5];
    int tprob [9];
    in_we = 0; start = 0; cs_we = 0; in_addr = 0; in_data = 0; cs_wa = 0; cs_wd = '0; n_entries = 0;
    repeat (3) @(posedge clk); #0.1 rst_n = 1;

    // ---- 1. nine-terminal example ----------------------------------------
    pk = '{36, 73, 109, 146, 182};            // five different kinds
    tprob = '{0, 1, 0, 2, 0, 3, 4, 2, 2};     // p1 p2 p1 p3 p1 p4 p5 p3 p3
    foreach (code_of[t]) code_of[t] = 0;
    for (int t = 0; t < 9; t++) code_of[t] = pk[tprob[t]];
    n_ent = 10;
    ent_term = '{default: 0};
    {ent_term[0], ent_term[1], ent_term[2]} = {32'd0, 32'd1, 32'd4};
    {ent_term[3], ent_term[4], ent_term[5]} = {32'd2, 32'd3, 32'd4};
    {ent_term[6], ent_term[7], ent_term[8], ent_term[9]} = {32'd5, 32'd6, 32'd7, 32'd8};
    ent_last = '{default: 0};
    ent_last[2] = 1; ent_last[5] = 1; ent_last[9] = 1;
    load();
    run_ctrl(cyc);
    chk(cyc == 2 * n_ent + 1, $sformatf("example cycles %0d", cyc));
    foreach (rowused[j]) rowused[j] = 0;
    for (int t = 0; t < 9; t++) if (sel_valid[t]) rowused[sel[t]] = 1;
    nused = 0;
    foreach (rowused[j]) nused += rowused[j];
    chk(nused == 7, $sformatf("example uses %0d SBGs, expected 7", nused));
    chk(sel[0] == sel[2], "T1 and T3 share");
    chk(sel[3] == sel[7], "T4 and T8 share");
    chk(sel[4] != sel[0], "T5 differs from T1/T3");
    chk(sel[8] != sel[7], "T9 differs from T8");
    chk(&sel_valid[8:0], "all nine connected");
    compare_with_model("example");

    // ---- 2. random sets ----------------------------------------------------
    for (int r = 0; r < 30; r++) begin
      int e;
      for (int t = 0; t < N; t++) code_of[t] = (r % 2) ? $urandom_range(0, 255)
                                                        : 40 * $urandom_range(0, 3);  // few kinds
      e = 0;
      // first cover every terminal once in sets of 2..5, then extra sets
      // that reuse terminals
      for (int t = 0; t < N; ) begin
        int sz;
        sz = $urandom_range(2, 3);
        for (int i = 0; i < sz && t < N; i++) begin ent_term[e] = t; ent_last[e] = 0; e++; t++; end
        ent_last[e-1] = 1;
      end
      for (int x = (r % 5); x > 0; x--) begin
        int sz, t0;
        sz = $urandom_range(2, 3);
        t0 = $urandom_range(0, N - 1);
        for (int i = 0; i < sz; i++) begin ent_term[e] = (t0 + i * 7) % N; ent_last[e] = 0; e++; end
        ent_last[e-1] = 1;
      end
      n_ent = e;
      load();
      run_ctrl(cyc);
      chk(cyc == 2 * n_ent + 1, $sformatf("random cycles %0d", cyc));
      compare_with_model($sformatf("random%0d", r));
      check_legal($sformatf("random%0d", r));
    end

    chk(n_clash > 0 && n_clash < 30, $sformatf("clash seen in %0d of 30 runs", n_clash));
    // ---- 3. overflow ---------------------------------------------------------
    foreach (code_of[t]) code_of[t] = 128;
    n_ent = PHI + 2;
    for (int e = 0; e < n_ent; e++) begin ent_term[e] = e; ent_last[e] = 0; end
    ent_last[n_ent-1] = 1;
    load();
    run_ctrl(cyc);
    chk(overflow, "overflow raised");
    compare_with_model("overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
