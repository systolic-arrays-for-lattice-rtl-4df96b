// tb_diag_cell -- self-checking testbench of diag_cell.
// Two cells are tested: an ordinary diagonal cell and the last one (D_mm).
// Each clock one random operation is applied and the registered results are
// compared, one clock later, with values computed here:
//   load, data mode ("#" with the Siegel test), size-reduction mode,
//   Givens write-back, column exchange, Q^H y and T x steps (both halves of
//   the MMSE vector), and the back-substitution division lx / r.
module tb_diag_cell;
  import lr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   n_swap = 0, n_noswap = 0;

  mode_e mode;
  logic  ld, m_in, rw_en, xc_en;
  r_t    ld_r, d_in, xc_r;
  q_t    ld_q, ld_q2;
  t_t    xc_t;
  rq_t   rw_val;
  xsr_t  x_in;
  ymu_t  y_in;
  dm_t   dx_in, dy_in, lx_in;
  // outputs of the two cells
  logic  m_out [2], c_out [2], swap [2];
  r_t    d_out [2], r [2];
  q_t    q [2], q2 [2];
  t_t    t [2];
  xsr_t  x_out [2];
  ymu_t  y_out [2];
  dm_t   dx_out [2], dy_out [2], uy_out [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    diag_cell #(.IS_LAST(g == 1)) dut (
      .clk, .rst_n, .mode, .ld, .ld_r, .ld_q, .ld_q2,
      .m_in, .d_in, .m_out(m_out[g]), .d_out(d_out[g]), .c_out(c_out[g]), .swap(swap[g]),
      .x_in, .x_out(x_out[g]), .y_in, .y_out(y_out[g]),
      .rw_en, .rw_val, .xc_en, .xc_r, .xc_t,
      .dx_in, .dy_in, .dx_out(dx_out[g]), .dy_out(dy_out[g]), .lx_in, .uy_out(uy_out[g]),
      .r(r[g]), .q(q[g]), .q2(q2[g]), .t(t[g]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  function automatic r_t rnd_r(int lim);
    r_t v;
    v.re = R_W'(rint(-lim, lim)); v.im = R_W'(rint(-lim, lim));
    return v;
  endfunction

  function automatic real mag2(r_t v);
    return (real'(v.re) * real'(v.re) + real'(v.im) * real'(v.im)) / real'(1 << R_F) / real'(1 << R_F);
  endfunction

  task automatic idle_inputs();
    mode = MODE_LR; ld = 0; m_in = 0; rw_en = 0; xc_en = 0;
    ld_r = '0; ld_q = '0; ld_q2 = '0; d_in = '0; xc_r = '0; xc_t = '0; rw_val = '0;
    x_in = '0; y_in = '0; dx_in = '0; dy_in = '0; lx_in = '0;
  endtask

  initial begin
    r_t  r0 [2];
    q_t  q0 [2], q20 [2];
    t_t  t0 [2];
    idle_inputs();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      int op;
      @(negedge clk);
      idle_inputs();
      for (int g = 0; g < 2; g++) begin r0[g] = r[g]; q0[g] = q[g]; q20[g] = q2[g]; t0[g] = t[g]; end
      op = (n < 2) ? 0 : rint(0, 8);
      unique case (op)
        0: begin ld = 1; ld_r = rnd_r(3 << R_F); ld_r.im = '0;
                 ld_q.re = Q_W'(rint(-4000, 4000)); ld_q.im = Q_W'(rint(-4000, 4000));
                 ld_q2.re = Q_W'(rint(-4000, 4000)); ld_q2.im = Q_W'(rint(-4000, 4000)); end
        1: begin m_in = 1; d_in = rnd_r(3 << R_F); end
        2: begin x_in = '{v: 1, star: 0, r: rnd_r(1 << R_F), t: '{re: T_W'(rint(-5, 5)), im: T_W'(rint(-5, 5))}};
                 y_in = '{v: 1, mu: '{re: MU_W'(rint(-2, 2)), im: MU_W'(rint(-2, 2))}}; end
        3: begin rw_en = 1; rw_val.r = rnd_r(2 << R_F);
                 rw_val.q.re = Q_W'(rint(-4000, 4000)); rw_val.q2.im = Q_W'(rint(-4000, 4000)); end
        4: begin xc_en = 1; xc_r = rnd_r(2 << R_F); xc_t = '{re: T_W'(rint(-9, 9)), im: T_W'(rint(-9, 9))}; end
        5, 6: begin mode = (op == 5) ? MODE_QY : MODE_TX;
                 dy_in = '{v: 1, sel2: 1'(rint(0, 1)), d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}};
                 dx_in = '{v: 1'(rint(0, 1)), sel2: 0, d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}}; end
        default: begin mode = (op == 7) ? MODE_RINV : MODE_SIC;
                 lx_in = '{v: 1, sel2: 0, d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}}; end
      endcase
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        unique case (op)
          0: expect1("load", r[g] == ld_r && q[g] == ld_q && q2[g] == ld_q2 &&
                             t[g].re == 1 && t[g].im == 0 && swap[g] == 0);
          1: begin
            logic sw_exp;
            expect1("token relayed", m_out[g] && d_out[g] == r0[g]);
            if (g == 0) begin
              sw_exp = mag2(d_in) < 0.49 * mag2(r0[g]);
              expect1("data mode", c_out[g] && x_out[g].v && x_out[g].star &&
                                   x_out[g].r == r0[g] && x_out[g].t == t0[g]);
              // exact ties of the Siegel test are practically impossible here
              expect1("siegel", swap[g] == sw_exp);
              if (sw_exp) n_swap++; else n_noswap++;
            end else begin
              expect1("last cell: no data mode", !c_out[g] && !x_out[g].v);
            end
          end
          2: begin
            int er, ei;
            er = int'(t0[g].re) - (int'(y_in.mu.re) * int'(x_in.t.re) - int'(y_in.mu.im) * int'(x_in.t.im));
            ei = int'(t0[g].im) - (int'(y_in.mu.re) * int'(x_in.t.im) + int'(y_in.mu.im) * int'(x_in.t.re));
            expect1("size reduction of t", int'(t[g].re) == er && int'(t[g].im) == ei && r[g] == r0[g]);
            expect1("pass x and mu", x_out[g] == x_in && y_out[g] == y_in);
          end
          3: expect1("rotation write", r[g] == rw_val.r && q[g] == rw_val.q && q2[g] == rw_val.q2 && t[g] == t0[g]);
          4: expect1("column exchange", r[g] == xc_r && t[g] == xc_t && q[g] == q0[g]);
          5, 6: begin
            longint ar, ai, br, bi, er, ei;
            if (op == 6) begin ar = t0[g].re; ai = t0[g].im; end
            else if (dy_in.sel2) begin ar = q20[g].re; ai = q20[g].im; end
            else begin ar = q0[g].re; ai = q0[g].im; end
            br = dy_in.d.re; bi = dy_in.d.im;
            er = ar * br - ai * bi; ei = ar * bi + ai * br;
            if (op == 5) begin er = (er + (1 <<< (Q_F - 1))) >>> Q_F; ei = (ei + (1 <<< (Q_F - 1))) >>> Q_F; end
            if (dx_in.v) begin er += dx_in.d.re; ei += dx_in.d.im; end
            expect1("matrix-vector step", dx_out[g].v && dx_out[g].sel2 == dy_in.sel2 &&
                    longint'(dx_out[g].d.re) == er && longint'(dx_out[g].d.im) == ei && dy_out[g] == dy_in);
          end
          default: begin
            real lr, li, rr, ri, den, er, ei, gr, gi;
            lr = real'(lx_in.d.re) / 4096.0; li = real'(lx_in.d.im) / 4096.0;
            rr = real'(r0[g].re) / 8192.0;   ri = real'(r0[g].im) / 8192.0;
            den = rr * rr + ri * ri;
            if (den > 0.25) begin
              er = (lr * rr + li * ri) / den; ei = (li * rr - lr * ri) / den;
              gr = real'(uy_out[g].d.re) / 4096.0; gi = real'(uy_out[g].d.im) / 4096.0;
              expect1("division", uy_out[g].v && (gr - er) < 0.003 && (er - gr) < 0.003 &&
                                  (gi - ei) < 0.003 && (ei - gi) < 0.003);
            end
          end
        endcase
      end
    end
    expect1("Siegel test seen both ways", n_swap > 0 && n_noswap > 0);
    $display("swap %0d no-swap %0d", n_swap, n_noswap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
