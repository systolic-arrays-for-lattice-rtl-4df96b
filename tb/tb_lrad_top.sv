// tb_lrad_top -- end-to-end test of the lattice-reduction-aided detector at
// its default size (M = 4, 16-QAM).
//
// For random complex Gaussian channels the testbench does its own QR
// decomposition in double precision (zero-forcing: H; MMSE: the extended
// [H; sigma I]), loads Q^H and R, runs FSR-LLL and ASLR, and checks the
// reduced basis independently of the design:
//   * T is unimodular (|det T| = 1, integer entries),
//   * R~ = Q~^H H_ext T (the rotations and swaps kept the basis consistent),
//   * R~ is upper triangular, size reduced (|Re mu|,|Im mu| <= 1/2) and meets
//     the Siegel condition |r_ii|^2 >= (delta-1/2)|r_i-1,i-1|^2, delta = 0.99.
// It then detects noise-free received vectors y = H x by linear detection and
// by SIC and expects x back exactly; points placed just outside the
// constellation must come back clipped onto its edge by Q(.).
// Every mechanism (swaps under both algorithms, parallel ASLR swaps, MMSE
// two-half products, SIC, boundary clipping, full-size-reduction-only runs)
// is counted and must occur at least once.
module tb_lrad_top;
  import lr_pkg::*;
  localparam int M = 4;
  localparam int NCH = 10;   // channels per (algorithm, ZF/MMSE) combination

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld, algo, lr_start, lr_busy, lr_done, lr_hit_limit;
  logic [15:0] lr_iter, lr_swaps, lr_pairs, lr_cycles, det_cycles;
  logic det_start, sic, mmse, det_busy, det_done;
  r_t ld_r [M][M];
  q_t ld_q [M][M], ld_q2 [M][M];
  d_t y [M], y2 [M], v [M], xhat [M], xq [M], tx [M];
  t_t x_lr [M];
  logic [1:0] v_words [M];
  r_t r_o [M][M];
  q_t q_o [M][M], q2_o [M][M];
  t_t t_o [M][M];

  lrad_top dut (
    .clk, .rst_n, .ld, .ld_r, .ld_q, .ld_q2,
    .algo, .lr_start, .lr_busy, .lr_done, .lr_hit_limit,
    .lr_iter, .lr_swaps, .lr_pairs, .lr_cycles,
    .det_start, .sic, .mmse, .y, .y2, .det_busy, .det_done,
    .v, .xhat, .xq, .tx, .x_lr, .v_words, .det_cycles,
    .r_o, .q_o, .q2_o, .t_o
  );

  int checks = 0, failures = 0;
  int n_swap_fsr = 0, n_swap_aslr = 0, n_parallel = 0, n_noswap = 0;
  int sum_cyc [2] = '{0, 0}, sum_swp [2] = '{0, 0}, n_run [2] = '{0, 0};
  int n_mmse = 0, n_sic = 0, n_lin = 0, n_clip = 0;

  // ---- double-precision channel model ----------------------------------------
  real Hr [2*M][M], Hi [2*M][M];     // extended channel
  real Qr [M][2*M], Qi [M][2*M];     // Q^H
  real Rr [M][M],   Ri [M][M];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // modified Gram-Schmidt QR of the N x M matrix H; Q^H is stored
  task automatic qr(input int n);
    real ar [2*M][M], ai [2*M][M];
    real sr, si, nrm;
    for (int a = 0; a < n; a++) for (int b = 0; b < M; b++) begin
      ar[a][b] = Hr[a][b]; ai[a][b] = Hi[a][b];
    end
    for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) begin Rr[i][j] = 0; Ri[i][j] = 0; end
    for (int k = 0; k < M; k++) begin
      for (int j = 0; j < k; j++) begin
        // r_jk = q_j^H a_k
        sr = 0; si = 0;
        for (int a = 0; a < n; a++) begin
          sr += Qr[j][a] * ar[a][k] - Qi[j][a] * ai[a][k];
          si += Qr[j][a] * ai[a][k] + Qi[j][a] * ar[a][k];
        end
        Rr[j][k] = sr; Ri[j][k] = si;
        for (int a = 0; a < n; a++) begin
          // a_k -= r_jk * q_j, q_j = conj(Q^H row j)
          ar[a][k] -= sr * Qr[j][a] + si * Qi[j][a];
          ai[a][k] -= si * Qr[j][a] - sr * Qi[j][a];
        end
      end
      nrm = 0;
      for (int a = 0; a < n; a++) nrm += ar[a][k] * ar[a][k] + ai[a][k] * ai[a][k];
      nrm = $sqrt(nrm);
      Rr[k][k] = nrm; Ri[k][k] = 0;
      for (int a = 0; a < 2*M; a++) begin
        Qr[k][a] = (a < n) ?  ar[a][k] / nrm : 0.0;
        Qi[k][a] = (a < n) ? -ai[a][k] / nrm : 0.0;
      end
    end
  endtask

  function automatic int fx(real a, int f);
    return $rtoi(a * (2.0 ** f) + ((a >= 0) ? 0.5 : -0.5));
  endfunction
  function automatic real rr(logic signed [R_W-1:0] a); return real'(a) / (2.0 ** R_F); endfunction
  function automatic real rq(logic signed [Q_W-1:0] a); return real'(a) / (2.0 ** Q_F); endfunction

  function automatic real fabs(real a); return (a < 0) ? -a : a; endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // |det T| of the integer matrix T (complex Gaussian elimination)
  function automatic real det_abs();
    real ar [M][M], ai [M][M];
    real dr, di, tr, ti, pr, pi, m2, fr, fi;
    int p;
    for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) begin
      ar[i][j] = real'(t_o[i][j].re); ai[i][j] = real'(t_o[i][j].im);
    end
    dr = 1; di = 0;
    for (int c = 0; c < M; c++) begin
      p = c;
      for (int i = c; i < M; i++)
        if (ar[i][c]**2 + ai[i][c]**2 > ar[p][c]**2 + ai[p][c]**2) p = i;
      if (ar[p][c]**2 + ai[p][c]**2 < 1e-12) return 0.0;
      if (p != c) for (int j = 0; j < M; j++) begin
        tr = ar[c][j]; ar[c][j] = ar[p][j]; ar[p][j] = tr;
        ti = ai[c][j]; ai[c][j] = ai[p][j]; ai[p][j] = ti;
      end
      pr = ar[c][c]; pi = ai[c][c];
      tr = dr * pr - di * pi; di = dr * pi + di * pr; dr = tr;
      m2 = pr * pr + pi * pi;
      for (int i = c + 1; i < M; i++) begin
        // f = a_ic / a_cc
        fr = (ar[i][c] * pr + ai[i][c] * pi) / m2;
        fi = (ai[i][c] * pr - ar[i][c] * pi) / m2;
        for (int j = c; j < M; j++) begin
          ar[i][j] -= fr * ar[c][j] - fi * ai[c][j];
          ai[i][j] -= fr * ai[c][j] + fi * ar[c][j];
        end
      end
    end
    return $sqrt(dr * dr + di * di);
  endfunction

  // ---- checks on the reduced basis ----------------------------------------------
  task automatic check_reduced(input int n);
    real htr [2*M][M], hti [2*M][M];
    real er, ei, emax, mr, mi, m2, d0, d1;
    bit  is_tri, sr_ok, sg_ok;
    check(det_abs() > 0.999 && det_abs() < 1.001, "T is not unimodular");
    // H_ext T
    for (int a = 0; a < n; a++) for (int j = 0; j < M; j++) begin
      htr[a][j] = 0; hti[a][j] = 0;
      for (int k = 0; k < M; k++) begin
        htr[a][j] += Hr[a][k] * t_o[k][j].re - Hi[a][k] * t_o[k][j].im;
        hti[a][j] += Hr[a][k] * t_o[k][j].im + Hi[a][k] * t_o[k][j].re;
      end
    end
    // Q~^H H T against R~
    emax = 0;
    for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) begin
      er = 0; ei = 0;
      for (int a = 0; a < n; a++) begin
        real qre, qim;
        qre = (a < M) ? rq(q_o[i][a].re) : rq(q2_o[i][a-M].re);
        qim = (a < M) ? rq(q_o[i][a].im) : rq(q2_o[i][a-M].im);
        er += qre * htr[a][j] - qim * hti[a][j];
        ei += qre * hti[a][j] + qim * htr[a][j];
      end
      er -= rr(r_o[i][j].re); ei -= rr(r_o[i][j].im);
      if ($sqrt(er*er + ei*ei) > emax) emax = $sqrt(er*er + ei*ei);
    end
    check(emax < 0.03, $sformatf("R~ != Q~^H H T (max error %f)", emax));
    is_tri = 1; sr_ok = 1; sg_ok = 1;
    for (int i = 0; i < M; i++) for (int j = 0; j < i; j++)
      if (fabs(rr(r_o[i][j].re)) > 0.003 || fabs(rr(r_o[i][j].im)) > 0.003) is_tri = 0;
    for (int i = 0; i < M; i++) for (int j = i + 1; j < M; j++) begin
      m2 = rr(r_o[i][i].re)**2 + rr(r_o[i][i].im)**2;
      mr = (rr(r_o[i][j].re) * rr(r_o[i][i].re) + rr(r_o[i][j].im) * rr(r_o[i][i].im)) / m2;
      mi = (rr(r_o[i][j].im) * rr(r_o[i][i].re) - rr(r_o[i][j].re) * rr(r_o[i][i].im)) / m2;
      if (fabs(mr) > 0.505 || fabs(mi) > 0.505) sr_ok = 0;
    end
    for (int i = 1; i < M; i++) begin
      d0 = rr(r_o[i-1][i-1].re)**2 + rr(r_o[i-1][i-1].im)**2;
      d1 = rr(r_o[i][i].re)**2 + rr(r_o[i][i].im)**2;
      if (d1 < 0.49 * d0 - 0.001) sg_ok = 0;
    end
    check(is_tri,   "R~ not upper triangular");
    check(sr_ok, "R~ not size reduced");
    check(sg_ok, "Siegel condition violated");
  endtask

  // ---- one detection ----------------------------------------------------------------
  task automatic detect(input int n, input bit use_sic, input bit clip_test);
    int xr [M], xi [M], er, ei;
    real yr, yi;
    for (int k = 0; k < M; k++) begin
      xr[k] = $urandom_range(0, 3); xi[k] = $urandom_range(0, 3);
    end
    if (clip_test) begin       // one symbol just outside the constellation
      xr[$urandom_range(0, M-1)] = 4;
      xi[$urandom_range(0, M-1)] = -1;
    end
    for (int a = 0; a < M; a++) begin
      yr = 0; yi = 0;
      for (int k = 0; k < M; k++) begin
        yr += Hr[a][k] * xr[k] - Hi[a][k] * xi[k];
        yi += Hr[a][k] * xi[k] + Hi[a][k] * xr[k];
      end
      y[a]  = '{re: D_W'(fx(yr, D_F)), im: D_W'(fx(yi, D_F))};
      y2[a] = '0;              // lower half of the extended y is zero
    end
    mmse = (n == 2 * M);
    sic  = use_sic;
    @(negedge clk) det_start = 1'b1;
    @(negedge clk) det_start = 1'b0;
    wait (det_done);
    @(negedge clk);
    if (mmse) begin
      check(v_words[0] == 2 && v_words[M-1] == 2, "MMSE: two partial products per row expected");
      if (v_words[0] == 2) n_mmse++;
    end
    if (use_sic) n_sic++; else n_lin++;
    for (int k = 0; k < M; k++) begin
      er = (xr[k] < 0) ? 0 : (xr[k] > 3) ? 3 : xr[k];
      ei = (xi[k] < 0) ? 0 : (xi[k] > 3) ? 3 : xi[k];
      if (er != xr[k] || ei != xi[k]) begin
        if (x_lr[k].re == T_W'(er) && x_lr[k].im == T_W'(ei)) n_clip++;
      end
      check(x_lr[k].re == T_W'(er) && x_lr[k].im == T_W'(ei),
            $sformatf("%s %s: x_lr[%0d] = (%0d,%0d), expected (%0d,%0d)",
                      mmse ? "MMSE" : "ZF", use_sic ? "SIC" : "linear",
                      k, x_lr[k].re, x_lr[k].im, er, ei));
    end
    check(det_cycles < 16'(8 * M + 10), "detection took too long");
  endtask

  // ---- one channel: QR, load, reduce, detect ---------------------------------------
  task automatic run_channel(input bit a, input bit ext);
    int n;
    real sigma;
    n = ext ? 2 * M : M;
    sigma = 0.03;   // small, so the MMSE bias cannot move a noise-free decision
    for (int r = 0; r < 2*M; r++) for (int c = 0; c < M; c++) begin
      if (r < M) begin
        Hr[r][c] = 0.35 * gauss(); Hi[r][c] = 0.35 * gauss();
      end else begin
        Hr[r][c] = (r - M == c) ? sigma : 0.0; Hi[r][c] = 0.0;
      end
    end
    qr(n);
    for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) begin
      ld_r[i][j]  = (i <= j) ? '{re: R_W'(fx(Rr[i][j], R_F)), im: R_W'(fx(Ri[i][j], R_F))} : '0;
      ld_q[i][j]  = '{re: Q_W'(fx(Qr[i][j], Q_F)),   im: Q_W'(fx(Qi[i][j], Q_F))};
      ld_q2[i][j] = '{re: Q_W'(fx(Qr[i][j+M], Q_F)), im: Q_W'(fx(Qi[i][j+M], Q_F))};
    end
    @(negedge clk) ld = 1'b1;
    @(negedge clk) ld = 1'b0;
    algo = a;
    @(negedge clk) lr_start = 1'b1;
    @(negedge clk) lr_start = 1'b0;
    wait (lr_done);
    @(negedge clk);
    check(!lr_hit_limit, "lattice reduction hit the iteration limit");
    if (lr_swaps == 0) n_noswap++;
    sum_cyc[a] += int'(lr_cycles); sum_swp[a] += int'(lr_swaps); n_run[a]++;
    if (a == 1'b0 && lr_swaps > 0) n_swap_fsr++;
    if (a == 1'b1 && lr_swaps > 0) n_swap_aslr++;
    if (a == 1'b1 && lr_pairs > lr_swaps) n_parallel++;
    // every iteration costs at least one full size reduction of 3M-3 cycles
    check(lr_cycles >= 16'(lr_iter * (3 * M - 3)), "lattice reduction faster than 3M-3 per iteration");
    check_reduced(n);
    detect(n, 1'b0, 1'b0);
    detect(n, 1'b1, 1'b0);
    detect(n, $urandom_range(0, 1) == 1, 1'b1);
  endtask

  initial begin
    ld = 0; algo = 0; lr_start = 0; det_start = 0; sic = 0; mmse = 0;
    for (int i = 0; i < M; i++) begin
      y[i] = '0; y2[i] = '0;
      for (int j = 0; j < M; j++) begin ld_r[i][j] = '0; ld_q[i][j] = '0; ld_q2[i][j] = '0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 2; a++)
      for (int e = 0; e < 2; e++)
        for (int c = 0; c < NCH; c++)
          run_channel(a[0], e[0]);
    $display("mechanisms: FSR-LLL swaps %0d, ASLR swaps %0d, ASLR parallel swaps %0d, no-swap runs %0d",
             n_swap_fsr, n_swap_aslr, n_parallel, n_noswap);
    $display("            linear %0d, SIC %0d, MMSE %0d, boundary clips %0d",
             n_lin, n_sic, n_mmse, n_clip);
    $display("            average per run: FSR-LLL %0.2f swap steps, %0.2f clocks; ASLR %0.2f swap steps, %0.2f clocks",
             real'(sum_swp[0]) / n_run[0], real'(sum_cyc[0]) / n_run[0],
             real'(sum_swp[1]) / n_run[1], real'(sum_cyc[1]) / n_run[1]);
    check(n_swap_fsr > 0,  "no FSR-LLL run swapped columns");
    check(n_swap_aslr > 0, "no ASLR run swapped columns");
    check(n_parallel > 0,  "no ASLR step swapped two pairs in parallel");
    check(n_noswap > 0,    "no run ended after a single full size reduction");
    check(n_mmse > 0,      "MMSE never exercised");
    check(n_sic > 0 && n_lin > 0, "linear or SIC detection never exercised");
    check(n_clip > 0,      "constellation boundary never clipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
