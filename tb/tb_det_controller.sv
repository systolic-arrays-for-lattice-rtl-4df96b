// tb_det_controller -- self-checking testbench of det_controller, run on a
// real lr_array (M = 4) holding a random upper-triangular R, random Q^H
// halves and the T left by one full size reduction.
//
// For each trial an integer vector z (in the reduced-lattice domain) is
// drawn, the TB builds v = R z + small noise and, from it, received vectors
// y (and, for MMSE, y2) with Q1 y + Q2 y2 = v.  The controller then runs
// Q^H y, linear back substitution or SIC, rounding, T x_q and the
// constellation quantiser.  Checked against floating-point / integer
// references computed here: v, x_hat (linear: R^-1 v; SIC: the recursion
// with the already detected symbols rounded), x_q, T x_q exactly, the
// clipped decision, the number of words combined per row (1 ZF, 2 MMSE),
// and the latency: done must rise 3 (2M+2) + 2 clocks after start is
// applied (three steps of 2M+2 clocks, plus the start and finish clocks) and
// det_cycles must count the 3 (2M+2) + 1 busy clocks.
module tb_det_controller;
  import lr_pkg::*;
  localparam int M = 4;
  localparam int QAM = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   n_mmse = 0, n_sic = 0, n_clip = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic real rnd(real lim);
    return (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * lim;
  endfunction

  localparam real RS = real'(1 << R_F), QS = real'(1 << Q_F), DS = real'(1 << D_F);

  // ---- array + controller ----------------------------------------------------
  mode_e mode;
  logic  ld, fsr_go, fsr_busy, rot_busy;
  logic [M-2:0] swap;
  r_t  ld_r [M][M], r_o [M][M];
  q_t  ld_q [M][M], ld_q2 [M][M], q_o [M][M], q2_o [M][M];
  t_t  t_o [M][M];
  dm_t y_top [M], dx_right [M], v_right [M], x_top [M];
  logic start, sic, mmse, busy, done;
  d_t  y [M], y2 [M], v [M], xhat [M], xq [M], tx [M];
  t_t  x_lr [M];
  logic [1:0] v_words [M];
  logic [15:0] det_cycles;

  lr_array #(.M(M)) u_arr (.clk, .rst_n, .mode, .ld, .ld_r, .ld_q, .ld_q2,
    .fsr_go, .fsr_busy, .swap, .sw('0), .cswap('0), .rot_busy,
    .y_top, .dx_right, .v_right, .x_top, .r_o, .q_o, .q2_o, .t_o);

  det_controller #(.M(M), .QAM(QAM)) dut (.clk, .rst_n, .start, .sic, .mmse, .y, .y2,
    .mode, .y_top, .dx_right, .v_right, .x_top, .busy, .done, .v, .xhat, .xq, .tx, .x_lr,
    .v_words, .det_cycles);

  // Gram-Schmidt of a random complex matrix: a random unitary U (rows)
  task automatic rand_unitary(output real ur [M][M], output real ui [M][M]);
    for (int i = 0; i < M; i++) begin
      real nn;
      for (int j = 0; j < M; j++) begin ur[i][j] = rnd(1.0); ui[i][j] = rnd(1.0); end
      for (int p = 0; p < i; p++) begin
        real cr, ci;
        cr = 0; ci = 0;        // <u_p, u_i> = sum conj(u_p) u_i
        for (int j = 0; j < M; j++) begin
          cr += ur[p][j] * ur[i][j] + ui[p][j] * ui[i][j];
          ci += ur[p][j] * ui[i][j] - ui[p][j] * ur[i][j];
        end
        for (int j = 0; j < M; j++) begin
          ur[i][j] -= cr * ur[p][j] - ci * ui[p][j];
          ui[i][j] -= cr * ui[p][j] + ci * ur[p][j];
        end
      end
      nn = 0;
      for (int j = 0; j < M; j++) nn += ur[i][j] ** 2 + ui[i][j] ** 2;
      nn = $sqrt(nn);
      for (int j = 0; j < M; j++) begin ur[i][j] /= nn; ui[i][j] /= nn; end
    end
  endtask

  function automatic real rd(logic signed [D_W-1:0] a);
    return real'(a) / DS;
  endfunction
  function automatic logic signed [D_W-1:0] todv(real a);
    return D_W'(longint'($floor(a * DS + 0.5)));
  endfunction
  function automatic int rnd_int(real a);
    return int'($floor(a + 0.5));
  endfunction

  initial begin
    real ur [M][M], ui [M][M];
    real rr [M][M], ri [M][M], q1r [M][M], q1i [M][M], q2r [M][M], q2i [M][M];
    ld = 0; fsr_go = 0; start = 0; sic = 0; mmse = 0;
    for (int i = 0; i < M; i++) begin y[i] = '0; y2[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 60; trial++) begin
      // ---- new channel: R, Q^H = 0.9 U (Q1) and small Q2, then one FSR ----
      rand_unitary(ur, ui);
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++) begin
          ld_r[i][j] = '0;
          if (i == j) ld_r[i][j].re = R_W'(int'((0.6 + rnd(0.4) + 0.4) * RS));
          else if (i < j) begin ld_r[i][j].re = R_W'(int'(rnd(1.2) * RS)); ld_r[i][j].im = R_W'(int'(rnd(1.2) * RS)); end
          ld_q[i][j].re  = Q_W'(int'(0.9 * ur[i][j] * QS)); ld_q[i][j].im = Q_W'(int'(0.9 * ui[i][j] * QS));
          ld_q2[i][j].re = Q_W'(int'(rnd(0.1) * QS));       ld_q2[i][j].im = Q_W'(int'(rnd(0.1) * QS));
        end
      @(negedge clk); ld = 1;
      @(negedge clk); ld = 0; fsr_go = 1;
      @(negedge clk); fsr_go = 0;
      while (fsr_busy) @(negedge clk);
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++) begin
          r_t  a; q_t b, c;
          a = r_o[i][j]; b = q_o[i][j]; c = q2_o[i][j];
          rr[i][j] = real'(a.re) / RS; ri[i][j] = real'(a.im) / RS;
          q1r[i][j] = real'(b.re) / QS; q1i[i][j] = real'(b.im) / QS;
          q2r[i][j] = real'(c.re) / QS; q2i[i][j] = real'(c.im) / QS;
        end
      for (int pass = 0; pass < 4; pass++) begin
        int  zr [M], zi [M];
        real vr [M], vi [M], wr [M], wi [M], xr [M], xi [M];
        int  qr [M], qi [M];
        int  t0, lat;
        logic ok;
        sic  = pass[0];
        mmse = pass[1];
        // ---- v = R z + n, y from v ----
        for (int i = 0; i < M; i++) begin zr[i] = $urandom_range(0, 7) - 2; zi[i] = $urandom_range(0, 7) - 2; end
        for (int i = 0; i < M; i++) begin
          vr[i] = rnd(0.01); vi[i] = rnd(0.01);
          for (int j = 0; j < M; j++) begin
            vr[i] += rr[i][j] * zr[j] - ri[i][j] * zi[j];
            vi[i] += rr[i][j] * zi[j] + ri[i][j] * zr[j];
          end
        end
        // y2 random (MMSE), w = v - Q2 y2, y = (Q1)^-1 w = U^H w / 0.9
        for (int j = 0; j < M; j++) begin
          y2[j].re = mmse ? todv(rnd(1.0)) : '0; y2[j].im = mmse ? todv(rnd(1.0)) : '0;
        end
        for (int i = 0; i < M; i++) begin
          wr[i] = vr[i]; wi[i] = vi[i];
          for (int j = 0; j < M; j++) begin
            wr[i] -= q2r[i][j] * rd(y2[j].re) - q2i[i][j] * rd(y2[j].im);
            wi[i] -= q2r[i][j] * rd(y2[j].im) + q2i[i][j] * rd(y2[j].re);
          end
        end
        for (int j = 0; j < M; j++) begin
          real a, b;
          a = 0; b = 0;
          for (int i = 0; i < M; i++) begin
            a += ur[i][j] * wr[i] + ui[i][j] * wi[i];
            b += ur[i][j] * wi[i] - ui[i][j] * wr[i];
          end
          y[j].re = todv(a / 0.9); y[j].im = todv(b / 0.9);
        end
        // reference v from the quantised Q and y
        for (int i = 0; i < M; i++) begin
          vr[i] = 0; vi[i] = 0;
          for (int j = 0; j < M; j++) begin
            vr[i] += q1r[i][j] * rd(y[j].re) - q1i[i][j] * rd(y[j].im);
            vi[i] += q1r[i][j] * rd(y[j].im) + q1i[i][j] * rd(y[j].re);
            if (mmse) begin
              vr[i] += q2r[i][j] * rd(y2[j].re) - q2i[i][j] * rd(y2[j].im);
              vi[i] += q2r[i][j] * rd(y2[j].im) + q2i[i][j] * rd(y2[j].re);
            end
          end
        end
        // reference back substitution
        for (int i = M - 1; i >= 0; i--) begin
          real ar, ai, den;
          ar = vr[i]; ai = vi[i];
          for (int j = i + 1; j < M; j++) begin
            real br, bi;
            br = sic ? real'(rnd_int(xr[j])) : xr[j];
            bi = sic ? real'(rnd_int(xi[j])) : xi[j];
            ar -= rr[i][j] * br - ri[i][j] * bi;
            ai -= rr[i][j] * bi + ri[i][j] * br;
          end
          den = rr[i][i] ** 2 + ri[i][i] ** 2;
          xr[i] = (ar * rr[i][i] + ai * ri[i][i]) / den;
          xi[i] = (ai * rr[i][i] - ar * ri[i][i]) / den;
        end
        // ---- run ----
        @(negedge clk); start = 1; t0 = $time;
        @(negedge clk); start = 0;
        while (!done) @(negedge clk);
        lat = ($time - t0) / 10;
        if (sic) n_sic++;
        if (mmse) n_mmse++;
        ok = 1;
        for (int i = 0; i < M; i++) begin
          real e;
          e = (rd(v[i].re) - vr[i]) ** 2 + (rd(v[i].im) - vi[i]) ** 2;
          if (e > 1e-4) begin ok = 0; $display("v[%0d] (%f,%f) exp (%f,%f)", i, rd(v[i].re), rd(v[i].im), vr[i], vi[i]); end
          if (int'(v_words[i]) != (mmse ? 2 : 1)) ok = 0;
        end
        expect1("Q^H y and combiner", ok);
        ok = 1;
        for (int i = 0; i < M; i++) begin
          real er, ei;
          // SIC hands on the rounded value of all but the first symbol
          er = (sic && i > 0) ? real'(rnd_int(xr[i])) : xr[i];
          ei = (sic && i > 0) ? real'(rnd_int(xi[i])) : xi[i];
          if ((rd(xhat[i].re) - er) ** 2 + (rd(xhat[i].im) - ei) ** 2 > 4e-4) begin
            ok = 0; $display("xhat[%0d] (%f,%f) exp (%f,%f)", i, rd(xhat[i].re), rd(xhat[i].im), er, ei);
          end
          qr[i] = rnd_int(rd(xhat[i].re)); qi[i] = rnd_int(rd(xhat[i].im));
          if (longint'(xq[i].re) != longint'(qr[i]) <<< D_F || longint'(xq[i].im) != longint'(qi[i]) <<< D_F) ok = 0;
          if (qr[i] != zr[i] || qi[i] != zi[i]) ok = 0;
        end
        expect1(sic ? "SIC" : "R^-1 v and rounding", ok);
        ok = 1;
        for (int i = 0; i < M; i++) begin
          int sr, si, cr, ci;
          sr = 0; si = 0;
          for (int j = 0; j < M; j++) begin
            t_t tv;
            tv = t_o[i][j];
            sr += int'(tv.re) * qr[j] - int'(tv.im) * qi[j];
            si += int'(tv.re) * qi[j] + int'(tv.im) * qr[j];
          end
          if (longint'(tx[i].re) != longint'(sr) <<< D_F || longint'(tx[i].im) != longint'(si) <<< D_F) ok = 0;
          cr = sr < 0 ? 0 : sr > 3 ? 3 : sr;
          ci = si < 0 ? 0 : si > 3 ? 3 : si;
          if (cr != sr || ci != si) n_clip++;
          if (int'(x_lr[i].re) != cr || int'(x_lr[i].im) != ci) ok = 0;
        end
        expect1("T x_q and quantiser", ok);
        expect1("latency", int'(det_cycles) == lat - 1 && lat == 3 * (2 * M + 2) + 2);
        if (trial == 0 && pass == 0) $display("detection latency %0d clocks, det_cycles %0d", lat, det_cycles);
      end
    end
    expect1("all modes and clipping exercised", n_sic > 0 && n_mmse > 0 && n_clip > 0);
    $display("SIC %0d MMSE %0d clipped %0d", n_sic, n_mmse, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
