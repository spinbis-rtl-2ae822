// spinbis_tb_host.svh -- host-side tasks shared by the SPINBIS system
// testbenches. Included inside a testbench module that declares GRID, L,
// PHI, N, NP, M, TW, CAW, the DUT port signals, checks and failures.
//
// Likelihoods of the target-locating problem: plane 64 x 64, sensors at
// (0,0), (0,32), (32,0); grid cell (i,j) has centre ((i+0.5)*64/GRID,
// (j+0.5)*64/GRID). For a target at cell (tx,ty) each sensor reports the
// exact distance and bearing of the target; the likelihood of a cell is
// exp(-(d - mu_d)^2 / (2 sigma_d^2)) with sigma_d = 5 + mu_d/10, times
// the same form for the bearing with sigma_b = 14.0626 degrees, each
// scaled to peak 1. Code = round(likelihood * 255).
//
// Source vs own choice: expected behaviour comes from the publication's
// description of the block; the stimulus, sizes and tolerances are this
// testbench's own choices.

int code [N];
int ent_term [N];
bit ent_last [N];
int n_ent;

task automatic chk(bit ok, string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL %s @%0t", what, $time);
  end
endtask

function automatic int kind_of(int c);
  return (2 * c * (L - 1) + 255) / (2 * 255);
endfunction

function automatic real level_of(int c);
  return real'(kind_of(c)) / (L - 1);
endfunction

task automatic fusion_inputs(int g, int tx, int ty);
  real sx [3], sy [3], cs, px, py, qx, qy, mu_d, mu_b, d, b, sd, db, lk;
  sx = '{0.0, 0.0, 32.0};
  sy = '{0.0, 32.0, 0.0};
  cs = 64.0 / g;
  qx = (tx + 0.5) * cs; qy = (ty + 0.5) * cs;
  for (int i = 0; i < g; i++)
    for (int j = 0; j < g; j++) begin
      int p;
      p = j * g + i;
      px = (i + 0.5) * cs; py = (j + 0.5) * cs;
      for (int s = 0; s < 3; s++) begin
        mu_d = $sqrt((qx - sx[s]) ** 2 + (qy - sy[s]) ** 2);
        mu_b = $atan2(qy - sy[s], qx - sx[s]) * 180.0 / 3.14159265358979;
        d  = $sqrt((px - sx[s]) ** 2 + (py - sy[s]) ** 2);
        b  = $atan2(py - sy[s], px - sx[s]) * 180.0 / 3.14159265358979;
        sd = 5.0 + mu_d / 10.0;
        lk = $exp(-((d - mu_d) ** 2) / (2.0 * sd * sd));
        code[p*6 + 2*s] = int'($floor(lk * 255.0 + 0.5));
        db = b - mu_b;
        if (db > 180.0) db -= 360.0;
        if (db < -180.0) db += 360.0;
        lk = $exp(-(db ** 2) / (2.0 * 14.0626 * 14.0626));
        code[p*6 + 2*s + 1] = int'($floor(lk * 255.0 + 0.5));
      end
    end
endtask

task automatic one_set_per_position();
  n_ent = N;
  for (int e = 0; e < N; e++) begin ent_term[e] = e; ent_last[e] = (e % 6 == 5); end
endtask

task automatic load_all();
  for (int t = 0; t < N; t++) begin
    in_we = 1; in_addr = TW'(t); in_data = 8'(code[t]);
    @(posedge clk); #0.1;
  end
  in_we = 0;
  for (int e = 0; e < n_ent; e++) begin
    cs_we = 1; cs_addr = CAW'(e); cs_data.term = 16'(ent_term[e]); cs_data.last = ent_last[e];
    @(posedge clk); #0.1;
  end
  cs_we = 0;
  n_entries = (CAW+1)'(n_ent);
endtask

task automatic configure(output int cycles);
  start = 1; @(posedge clk); #0.1; start = 0;
  cycles = 1;
  while (!done) begin @(posedge clk); #0.1; cycles++; end
endtask

// legality of the connection; counts SBG rows shared by several positions
// and sets in which equal values were given distinct SBGs
task automatic check_connections(output int n_share, output int n_sep);
  int users [M];
  foreach (users[j]) users[j] = 0;
  n_share = 0; n_sep = 0;
  for (int t = 0; t < N; t++) begin
    chk(dut.u_ctrl.sel_valid[t], "terminal connected");
    chk(int'(dut.u_ctrl.sel[t]) / PHI == kind_of(code[t]), "terminal gets its kind");
    users[dut.u_ctrl.sel[t]]++;
  end
  foreach (users[j]) if (users[j] > 1) n_share++;
  for (int p = 0; p < NP; p++) begin
    bit sep;
    sep = 0;
    for (int a = 0; a < 6; a++)
      for (int c = a + 1; c < 6; c++) begin
        chk(dut.u_ctrl.sel[p*6+a] != dut.u_ctrl.sel[p*6+c], "no shared SBG in a set");
        if (kind_of(code[p*6+a]) == kind_of(code[p*6+c])) sep = 1;
      end
    n_sep += sep;
  end
endtask

// run nb bits; cnt[p] = ones of r[p]; t_first = clock of first bit
task automatic infer(int nb, output int cnt [NP], output int t_first);
  int nbits, c, tprev;
  foreach (cnt[p]) cnt[p] = 0;
  nbits = 0; c = 0; tprev = -1; t_first = -1;
  run = 1;
  while (nbits < nb) begin
    @(posedge clk); #0.1; c++;
    if (bv) begin
      if (t_first < 0) t_first = c;
      else chk(c - tprev == 10, "one bit per 10 clocks");
      tprev = c;
      nbits++;
      for (int p = 0; p < NP; p++) cnt[p] += r[p];
    end
  end
  run = 0;
  repeat (12) @(posedge clk);
  #0.1;
endtask

task automatic check_counts(int nb, int cnt [NP], real tol, int tx, int ty);
  int pt, best;
  pt = ty * GRID + tx;
  best = 0;
  for (int p = 0; p < NP; p++) begin
    real e, est;
    e = 1.0;
    for (int k = 0; k < 6; k++) e *= level_of(code[p*6+k]);
    est = real'(cnt[p]) / nb;
    chk(est > e - tol && est < e + tol, $sformatf("position %0d: %f vs %f", p, est, e));
    if (cnt[p] > best) best = cnt[p];
  end
  chk(cnt[pt] == nb, $sformatf("target cell all ones (%0d of %0d)", cnt[pt], nb));
  chk(cnt[pt] == best, "target cell has the largest count");
endtask
