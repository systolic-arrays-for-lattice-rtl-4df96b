// tb_offdiag_cell -- self-checking testbench of offdiag_cell.
// An ordinary off-diagonal cell and a super-diagonal one (SUPER) get the
// same random operation each clock; one clock later the registered results
// are compared with values computed here:
//   tagged (r,t) from the diagonal cell: mu = [[r / r_diag]] (each part
//   rounded to the nearest integer and clipped to +-2), r -= mu r_diag,
//   t -= mu t_diag, mu sent up and down;
//   untagged (r,t) with a mu from above or below: the same update with it;
//   "#" (data mode): the cell's own (r,t) goes right, "#" goes on;
//   Q^H y / T x steps and the back-substitution step lx - r*y, where the
//   super-diagonal cell rounds y first in SIC mode.
module tb_offdiag_cell;
  import lr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   n_sat = 0, n_round = 0;

  mode_e mode;
  logic  ld, c_in, rw_en, xc_en;
  r_t    ld_r, xc_r;
  q_t    ld_q, ld_q2;
  t_t    xc_t;
  rq_t   rw_val;
  xsr_t  x_in;
  ymu_t  yu_in, yd_in;
  dm_t   dx_in, dy_in, lx_in, uy_in;
  logic  c_out [2];
  r_t    r [2];
  q_t    q [2], q2 [2];
  t_t    t [2];
  xsr_t  x_out [2];
  ymu_t  yu_out [2], yd_out [2];
  dm_t   dx_out [2], dy_out [2], lx_out [2], uy_out [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    offdiag_cell #(.SUPER(g == 1)) dut (
      .clk, .rst_n, .mode, .ld, .ld_r, .ld_q, .ld_q2,
      .c_in, .c_out(c_out[g]), .x_in, .x_out(x_out[g]),
      .yu_in, .yu_out(yu_out[g]), .yd_in, .yd_out(yd_out[g]),
      .rw_en, .rw_val, .xc_en, .xc_r, .xc_t,
      .dx_in, .dy_in, .dx_out(dx_out[g]), .dy_out(dy_out[g]),
      .lx_in, .lx_out(lx_out[g]), .uy_in, .uy_out(uy_out[g]),
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

  // nearest integer clipped to +-2, from the real quotient
  function automatic int qround(real v);
    int k;
    k = int'($floor((v < 0 ? -v : v) + 0.5));
    if (k > 2) k = 2;
    return v < 0 ? -k : k;
  endfunction

  function automatic longint rnd_half_up(longint v, int s);
    return (v + (longint'(1) <<< (s - 1))) >>> s;
  endfunction

  task automatic idle_inputs();
    mode = MODE_LR; ld = 0; c_in = 0; rw_en = 0; xc_en = 0;
    ld_r = '0; ld_q = '0; ld_q2 = '0; xc_r = '0; xc_t = '0; rw_val = '0;
    x_in = '0; yu_in = '0; yd_in = '0; dx_in = '0; dy_in = '0; lx_in = '0; uy_in = '0;
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
      op = (n < 2 || n % 5 == 0) ? 0 : rint(1, 7);
      unique case (op)
        0: begin ld = 1; ld_r = rnd_r(3 << R_F);
                 ld_q.re = Q_W'(rint(-4000, 4000)); ld_q.im = Q_W'(rint(-4000, 4000));
                 ld_q2.re = Q_W'(rint(-4000, 4000)); ld_q2.im = Q_W'(rint(-4000, 4000)); end
        1: x_in = '{v: 1, star: 1, r: rnd_r(2 << R_F), t: '{re: T_W'(rint(-5, 5)), im: T_W'(rint(-5, 5))}};
        2: begin x_in = '{v: 1, star: 0, r: rnd_r(1 << R_F), t: '{re: T_W'(rint(-5, 5)), im: T_W'(rint(-5, 5))}};
                 if (rint(0, 1)) yd_in = '{v: 1, mu: '{re: MU_W'(rint(-2, 2)), im: MU_W'(rint(-2, 2))}};
                 else            yu_in = '{v: 1, mu: '{re: MU_W'(rint(-2, 2)), im: MU_W'(rint(-2, 2))}}; end
        3: c_in = 1;
        4, 5: begin mode = (op == 4) ? MODE_QY : MODE_TX;
                 dy_in = '{v: 1, sel2: 1'(rint(0, 1)), d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}};
                 dx_in = '{v: 1'(rint(0, 1)), sel2: 0, d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}}; end
        default: begin mode = (op == 6) ? MODE_RINV : MODE_SIC;
                 uy_in = '{v: 1, sel2: 0, d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}};
                 lx_in = '{v: 1, sel2: 0, d: '{re: D_W'(rint(-20000, 20000)), im: D_W'(rint(-20000, 20000))}}; end
      endcase
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        unique case (op)
          0: expect1("load", r[g] == ld_r && q[g] == ld_q && q2[g] == ld_q2 && t[g] == '0);
          1, 2: begin
            int mr, mi;
            longint er, ei;
            if (op == 1) begin
              real ar, ai, br, bi, den;
              ar = real'(r0[g].re); ai = real'(r0[g].im);
              br = real'(x_in.r.re); bi = real'(x_in.r.im);
              den = br * br + bi * bi;
              mr = (den == 0.0) ? 0 : qround((ar * br + ai * bi) / den);
              mi = (den == 0.0) ? 0 : qround((ai * br - ar * bi) / den);
              if (mr == 2 || mr == -2) n_sat++;
              expect1("mu sent up and down", yu_out[g].v && yd_out[g].v &&
                      int'(yu_out[g].mu.re) == mr && int'(yu_out[g].mu.im) == mi && yd_out[g] == yu_out[g]);
            end else begin
              ymu_t y;
              y = yd_in.v ? yd_in : yu_in;
              mr = y.mu.re; mi = y.mu.im;
              expect1("mu passed on", yd_out[g] == yd_in && yu_out[g] == yu_in);
            end
            er = longint'(r0[g].re) - (mr * longint'(x_in.r.re) - mi * longint'(x_in.r.im));
            ei = longint'(r0[g].im) - (mr * longint'(x_in.r.im) + mi * longint'(x_in.r.re));
            expect1("size reduction of r", longint'(r[g].re) == er && longint'(r[g].im) == ei);
            er = longint'(t0[g].re) - (mr * longint'(x_in.t.re) - mi * longint'(x_in.t.im));
            ei = longint'(t0[g].im) - (mr * longint'(x_in.t.im) + mi * longint'(x_in.t.re));
            expect1("size reduction of t", longint'(t[g].re) == er && longint'(t[g].im) == ei);
            expect1("x passed right", x_out[g] == x_in && !c_out[g]);
          end
          3: expect1("data mode", c_out[g] && x_out[g].v && !x_out[g].star &&
                                  x_out[g].r == r0[g] && x_out[g].t == t0[g] && r[g] == r0[g]);
          4, 5: begin
            longint ar, ai, br, bi, er, ei;
            if (op == 5) begin ar = t0[g].re; ai = t0[g].im; end
            else if (dy_in.sel2) begin ar = q20[g].re; ai = q20[g].im; end
            else begin ar = q0[g].re; ai = q0[g].im; end
            br = dy_in.d.re; bi = dy_in.d.im;
            er = ar * br - ai * bi; ei = ar * bi + ai * br;
            if (op == 4) begin er = rnd_half_up(er, Q_F); ei = rnd_half_up(ei, Q_F); end
            if (dx_in.v) begin er += dx_in.d.re; ei += dx_in.d.im; end
            expect1("matrix-vector step", dx_out[g].v && dx_out[g].sel2 == dy_in.sel2 &&
                    longint'(dx_out[g].d.re) == er && longint'(dx_out[g].d.im) == ei && dy_out[g] == dy_in);
          end
          default: begin
            longint yr, yi, er, ei;
            yr = uy_in.d.re; yi = uy_in.d.im;
            if (op == 7 && g == 1) begin
              yr = rnd_half_up(yr, D_F) <<< D_F; yi = rnd_half_up(yi, D_F) <<< D_F;
              n_round++;
            end
            er = longint'(lx_in.d.re) - rnd_half_up(longint'(r0[g].re) * yr - longint'(r0[g].im) * yi, R_F);
            ei = longint'(lx_in.d.im) - rnd_half_up(longint'(r0[g].re) * yi + longint'(r0[g].im) * yr, R_F);
            expect1("back substitution", lx_out[g].v && longint'(lx_out[g].d.re) == er &&
                    longint'(lx_out[g].d.im) == ei);
            expect1("y passed up", uy_out[g].v && longint'(uy_out[g].d.re) == yr && longint'(uy_out[g].d.im) == yi);
          end
        endcase
      end
    end
    expect1("mu saturation and SIC rounding exercised", n_sat > 0 && n_round > 0);
    $display("saturated mu %0d, SIC roundings %0d", n_sat, n_round);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
