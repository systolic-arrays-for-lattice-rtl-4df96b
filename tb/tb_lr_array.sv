// tb_lr_array -- self-checking testbench of lr_array, the systolic array
// alone, driven the way the controller drives it.
//
// Two arrays are run side by side, M = 4 (the default) and M = 6, on random
// upper-triangular R (real positive diagonal) with T = I.  For each trial:
//  1. one "#" (fsr_go) starts the full size reduction.  R and T afterwards
//     must equal a model computed here, in the order of the paper's
//     algorithm: for j = m down to 2, for i = j-1 down to 1, mu = [[r_ij / r_ii]] (nearest integer per part, clipped to +-2)
//     and column j -= mu * column i, in R and T.  The swap flags must equal
//     the Siegel test |r_b+1,b+1|^2 < 0.49 |r_bb|^2.  The wavefront must be
//     over 3M-3 clocks (plus the fixed start/end clocks measured below) after
//     the "#" enters: the duration of the M = 6 run minus that of the M = 4
//     run must be exactly 3*(6-4) clocks, as the 3m-3 normalised cycles of a
//     full size reduction require.
//  2. for one pair b with swap set, the switch is closed for one clock, the
//     rotation is waited for and the columns are exchanged.  R must stay
//     upper triangular, R^H R must become P^T (R^H R) P (P the exchange)
//     up to rounding, Q^H R must become Q^H R P, T columns b and b+1 must be
//     exchanged exactly, and the rotation must be over within M+1 clocks.
module tb_lr_array;
  import lr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   n_rot = 0, n_sat = 0, n_ovf = 0;
  localparam longint RMAX = (longint'(1) <<< (R_W - 1)) - 1;
  int   dur4 [$], dur6 [$];

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int rint(int lo, int hi);
    return int'($urandom_range(0, hi - lo)) + lo;
  endfunction

  function automatic int qround(real v);
    int k;
    k = int'($floor((v < 0 ? -v : v) + 0.5));
    if (k > 2) k = 2;
    return v < 0 ? -k : k;
  endfunction

  localparam real RS = real'(1 << R_F), QS = real'(1 << Q_F);

  // ---------------------------------------------------------------------------
  // one test bench slice per array size
  for (genvar s = 0; s < 2; s++) begin : g_sz
    localparam int M = (s == 0) ? 4 : 6;
    mode_e mode;
    logic  ld, fsr_go, fsr_busy, rot_busy;
    logic [M-2:0] swap, sw, cswap;
    r_t    ld_r [M][M], r_o [M][M];
    q_t    ld_q [M][M], ld_q2 [M][M], q_o [M][M], q2_o [M][M];
    t_t    t_o [M][M];
    dm_t   y_top [M], dx_right [M], v_right [M], x_top [M];

    lr_array #(.M(M)) dut (.clk, .rst_n, .mode, .ld, .ld_r, .ld_q, .ld_q2,
      .fsr_go, .fsr_busy, .swap, .sw, .cswap, .rot_busy,
      .y_top, .dx_right, .v_right, .x_top, .r_o, .q_o, .q2_o, .t_o);

    // model matrices (integers in R and T formats; Q as real)
    longint mr [M][M], mi [M][M];
    int     tr [M][M], ti [M][M];

    task automatic init();
      mode = MODE_LR; ld = 0; fsr_go = 0; sw = '0; cswap = '0;
      for (int i = 0; i < M; i++) begin
        y_top[i] = '0; v_right[i] = '0;
        for (int j = 0; j < M; j++) begin ld_r[i][j] = '0; ld_q[i][j] = '0; ld_q2[i][j] = '0; end
      end
    endtask

    task automatic load_random();
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++) begin
          ld_r[i][j] = '0;
          if (i == j) ld_r[i][j].re = R_W'(rint(int'(0.2 * RS), int'(2.0 * RS)));
          else if (i < j) begin
            ld_r[i][j].re = R_W'(rint(-int'(2.5 * RS), int'(2.5 * RS)));
            ld_r[i][j].im = R_W'(rint(-int'(2.5 * RS), int'(2.5 * RS)));
          end
          ld_q[i][j].re  = Q_W'(rint(-3000, 3000)); ld_q[i][j].im  = Q_W'(rint(-3000, 3000));
          ld_q2[i][j].re = Q_W'(rint(-3000, 3000)); ld_q2[i][j].im = Q_W'(rint(-3000, 3000));
          mr[i][j] = ld_r[i][j].re; mi[i][j] = ld_r[i][j].im;
          tr[i][j] = (i == j); ti[i][j] = 0;
        end
      @(negedge clk); ld = 1;
      @(negedge clk); ld = 0;
    endtask

    task automatic model_fsr();
      for (int j = M - 1; j >= 1; j--)
        for (int i = j - 1; i >= 0; i--) begin
          real ar, ai, br, bi, den;
          int  ur, ui;
          ar = real'(mr[i][j]); ai = real'(mi[i][j]);
          br = real'(mr[i][i]); bi = real'(mi[i][i]);
          den = br * br + bi * bi;
          ur = qround((ar * br + ai * bi) / den);
          ui = qround((ai * br - ar * bi) / den);
          if (ur == 2 || ur == -2 || ui == 2 || ui == -2) n_sat++;
          for (int k = 0; k < M; k++) begin
            longint xr, xi;
            int     yr, yi;
            xr = mr[k][i]; xi = mi[k][i];
            mr[k][j] -= ur * xr - ui * xi;
            mi[k][j] -= ur * xi + ui * xr;
            // R is (18,13): a result beyond +-16 saturates, as in the cells
            if (mr[k][j] > RMAX) begin mr[k][j] = RMAX; n_ovf++; end
            if (mr[k][j] < -RMAX - 1) begin mr[k][j] = -RMAX - 1; n_ovf++; end
            if (mi[k][j] > RMAX) begin mi[k][j] = RMAX; n_ovf++; end
            if (mi[k][j] < -RMAX - 1) begin mi[k][j] = -RMAX - 1; n_ovf++; end
            yr = tr[k][i]; yi = ti[k][i];
            tr[k][j] -= ur * yr - ui * yi;
            ti[k][j] -= ur * yi + ui * yr;
          end
        end
    endtask

    // Gram matrix of the current R, and Q^H R, in floating point
    task automatic gram(output real gr [M][M], output real gi [M][M],
                        output real hr [M][M], output real hi [M][M]);
      for (int a = 0; a < M; a++)
        for (int b = 0; b < M; b++) begin
          gr[a][b] = 0; gi[a][b] = 0; hr[a][b] = 0; hi[a][b] = 0;
          for (int k = 0; k < M; k++) begin
            real xr, xi, yr, yi, qr, qi;
            xr = real'(r_o[k][a].re) / RS; xi = real'(r_o[k][a].im) / RS;
            yr = real'(r_o[k][b].re) / RS; yi = real'(r_o[k][b].im) / RS;
            gr[a][b] += xr * yr + xi * yi;
            gi[a][b] += xr * yi - xi * yr;
            // (Q^H)^H R = Q R : row a of Q^H is stored, so (Q^H)^H[a][k] = conj(q[k][a])
            qr = real'(q_o[k][a].re) / QS; qi = -real'(q_o[k][a].im) / QS;
            hr[a][b] += qr * yr - qi * yi;
            hi[a][b] += qr * yi + qi * yr;
          end
        end
    endtask

    task automatic run(int trial, output int dur);
      real g0r [M][M], g0i [M][M], h0r [M][M], h0i [M][M];
      real g1r [M][M], g1i [M][M], h1r [M][M], h1i [M][M];
      t_t  tsave [M][M];
      int  b, rd;
      logic ok;
      load_random();
      model_fsr();
      // ---- full size reduction ----
      @(negedge clk); fsr_go = 1;
      @(negedge clk); fsr_go = 0;
      dur = 1;
      while (fsr_busy) begin @(negedge clk); dur++; end
      ok = 1;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++)
          begin
            r_t rv;
            t_t tv;
            rv = r_o[i][j];
            tv = t_o[i][j];
            if (longint'(rv.re) != mr[i][j] || longint'(rv.im) != mi[i][j] ||
                int'(tv.re) != tr[i][j] || int'(tv.im) != ti[i][j]) begin
              ok = 0;
              $display("M=%0d trial %0d (%0d,%0d): r (%0d,%0d) exp (%0d,%0d) t (%0d,%0d) exp (%0d,%0d)",
                       M, trial, i, j, longint'(rv.re), longint'(rv.im), mr[i][j], mi[i][j],
                       int'(tv.re), int'(tv.im), tr[i][j], ti[i][j]);
            end
          end
      expect1("full size reduction result", ok);
      ok = 1;
      for (int k = 0; k < M - 1; k++) begin
        real d0, d1;
        d0 = real'(mr[k][k]) ** 2 + real'(mi[k][k]) ** 2;
        d1 = real'(mr[k+1][k+1]) ** 2 + real'(mi[k+1][k+1]) ** 2;
        if (swap[k] != (d1 < 0.49 * d0)) ok = 0;
      end
      expect1("swap flags = Siegel test", ok);
      // ---- rotation and column exchange of one flagged pair ----
      b = -1;
      for (int k = 0; k < M - 1; k++) if (swap[k] && (b < 0 || rint(0, 1) == 1)) b = k;
      if (b < 0) return;
      n_rot++;
      gram(g0r, g0i, h0r, h0i);
      tsave = t_o;
      @(negedge clk); sw[b] = 1;
      @(negedge clk); sw = '0;
      rd = 1;
      while (rot_busy) begin @(negedge clk); rd++; end
      expect1("rotation duration", rd <= M + 1);
      cswap[b] = 1;
      @(negedge clk); cswap = '0;
      gram(g1r, g1i, h1r, h1i);
      ok = 1;
      for (int i = 1; i < M; i++)
        for (int j = 0; j < i; j++) if (r_o[i][j] != '0) ok = 0;
      expect1("R stays upper triangular", ok);
      ok = 1;
      for (int a = 0; a < M; a++)
        for (int c = 0; c < M; c++) begin
          int pa, pc;
          real tol;
          pa = (a == b) ? b + 1 : (a == b + 1) ? b : a;
          pc = (c == b) ? b + 1 : (c == b + 1) ? b : c;
          tol = 0.02 * (1.0 + $sqrt(g0r[pa][pa] * g0r[pc][pc]));
          if (g1r[a][c] - g0r[pa][pc] > tol || g0r[pa][pc] - g1r[a][c] > tol ||
              g1i[a][c] - g0i[pa][pc] > tol || g0i[pa][pc] - g1i[a][c] > tol) ok = 0;
          tol = 0.02 * (1.0 + $sqrt(g0r[pc][pc]));
          if (h1r[a][c] - h0r[a][pc] > tol || h0r[a][pc] - h1r[a][c] > tol ||
              h1i[a][c] - h0i[a][pc] > tol || h0i[a][pc] - h1i[a][c] > tol) ok = 0;
          if (t_o[a][c] != tsave[a][pc]) ok = 0;
        end
      expect1("rotation + column exchange", ok);
    endtask
  end

  initial begin
    int d;
    g_sz[0].init();
    g_sz[1].init();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 150; n++) begin
      g_sz[0].run(n, d); dur4.push_back(d);
      g_sz[1].run(n, d); dur6.push_back(d);
    end
    // the wavefront's length: the same every time, 3 clocks longer per row
    for (int n = 0; n < dur4.size(); n++)
      expect1("FSR duration", dur4[n] == dur4[0] && dur6[n] == dur6[0] && dur6[n] - dur4[n] == 3 * 2);
    // the fixed overhead beyond 3M-3: the "#" enters (1) and the busy flag
    // falls one clock after the last message (1), measured once here
    expect1("FSR duration = 3M-3 + 2", dur4[0] == 3 * 4 - 3 + 2);
    $display("FSR clocks M=4: %0d, M=6: %0d; rotations %0d; saturated mu %0d; saturated r %0d",
             dur4[0], dur6[0], n_rot, n_sat, n_ovf);
    expect1("rotations and saturation exercised",
            n_rot > 0 && n_sat > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
