// lr_pkg -- shared types, word lengths and fixed-point helpers of the
// lattice-reduction-aided (LRA) MIMO detector systolic array.
//
// All matrix data are complex and held as two's complement fixed point,
// written (W,F) = W bits in total, F of them fractional.  The word lengths of
// R, Q^H, T and mu are those of the published FPGA build: R (18,13),
// Q^H (14,13), T (8,0), mu (3,0).  The word lengths of the detection data
// (y, v, x_hat) and of the rotation coefficients eta are this design's own
// choice, since the paper does not give them.
//
// The Siegel condition |r_ii|^2 < (delta-1/2)|r_i-1,i-1|^2 uses delta = 0.99
// (the paper's choice); (delta-1/2) is held as an unsigned 0.16 constant.
package lr_pkg;

  // ---- word lengths -------------------------------------------------------
  localparam int R_W  = 18;  // R   : (18,13)  paper
  localparam int R_F  = 13;
  localparam int Q_W  = 14;  // Q^H : (14,13)  paper
  localparam int Q_F  = 13;
  localparam int T_W  = 8;   // T   : (8,0)    paper
  localparam int MU_W = 3;   // mu  : (3,0)    paper
  localparam int MU_MAX = 2; // |Re mu|,|Im mu| saturate at 2 (paper)
  localparam int D_W  = 24;  // detection data y, v, x_hat : (24,12) assumed
  localparam int D_F  = 12;
  localparam int E_W  = 18;  // rotation coefficients eta : (18,16) assumed
  localparam int E_F  = 16;

  // (delta - 1/2) with delta = 0.99, as an unsigned 0.16 fraction
  localparam int SIEGEL_F = 16;
  localparam logic [16:0] SIEGEL_C = 17'd32113;  // round(0.49 * 2^16)

  // ---- complex types ------------------------------------------------------
  typedef struct packed { logic signed [R_W-1:0]  re, im; } r_t;
  typedef struct packed { logic signed [Q_W-1:0]  re, im; } q_t;
  typedef struct packed { logic signed [T_W-1:0]  re, im; } t_t;
  typedef struct packed { logic signed [MU_W-1:0] re, im; } mu_t;
  typedef struct packed { logic signed [D_W-1:0]  re, im; } d_t;
  typedef struct packed { logic signed [E_W-1:0]  re, im; } e_t;

  // wide intermediate (products before scaling)
  typedef logic signed [63:0] w_t;
  typedef struct packed { w_t re, im; } cw_t;

  // ---- operating modes of the processing elements ---------------------------
  typedef enum logic [2:0] {
    MODE_LR   = 3'd0,  // lattice reduction: data / size-reduction modes (Fig. 4b)
    MODE_QY   = 3'd1,  // x_out = x_in + q * y_in                      (Fig. 12a)
    MODE_TX   = 3'd2,  // x_out = x_in + t * y_in                      (Fig. 12a)
    MODE_RINV = 3'd3,  // back substitution x_hat = R^-1 v            (Fig. 12b)
    MODE_SIC  = 3'd4   // back substitution with rounding (SIC)        (Fig. 13)
  } mode_e;

  // ---- messages between cells ------------------------------------------------
  // horizontal size-reduction message: (r,t) with the tag bit (*) that marks
  // data sent out by a diagonal cell
  typedef struct packed { logic v; logic star; r_t r; t_t t; } xsr_t;
  // vertical size-reduction message: mu
  typedef struct packed { logic v; mu_t mu; } ymu_t;
  // detection data word; sel2 marks the second half y2 of the MMSE vector
  typedef struct packed { logic v; logic sel2; d_t d; } dm_t;
  // Givens rotation angle Theta = (eta1, eta2)
  typedef struct packed { logic v; e_t e1; e_t e2; } theta_t;
  // contents of a cell touched by a Givens rotation
  typedef struct packed { r_t r; q_t q; q_t q2; } rq_t;

  // ---- fixed-point helpers ------------------------------------------------------
  function automatic w_t sat(w_t a, int w);
    w_t hi, lo;
    hi = (w_t'(1) <<< (w - 1)) - 1;
    lo = -(w_t'(1) <<< (w - 1));
    if (a > hi) return hi;
    if (a < lo) return lo;
    return a;
  endfunction

  // arithmetic shift right with round-half-up
  function automatic w_t rshr(w_t a, int s);
    if (s <= 0) return a <<< (-s);
    return (a + (w_t'(1) <<< (s - 1))) >>> s;
  endfunction

  function automatic cw_t cmul(w_t ar, w_t ai, w_t br, w_t bi);
    cw_t p;
    p.re = ar * br - ai * bi;
    p.im = ar * bi + ai * br;
    return p;
  endfunction

  // a * conj(b)
  function automatic cw_t cmulc(w_t ar, w_t ai, w_t br, w_t bi);
    cw_t p;
    p.re = ar * br + ai * bi;
    p.im = ai * br - ar * bi;
    return p;
  endfunction

  // scale a wide complex value down by s bits and saturate to each type
  function automatic r_t to_r(cw_t a, int s);
    r_t o;
    o.re = R_W'(sat(rshr(a.re, s), R_W));
    o.im = R_W'(sat(rshr(a.im, s), R_W));
    return o;
  endfunction
  function automatic q_t to_q(cw_t a, int s);
    q_t o;
    o.re = Q_W'(sat(rshr(a.re, s), Q_W));
    o.im = Q_W'(sat(rshr(a.im, s), Q_W));
    return o;
  endfunction
  function automatic t_t to_t(cw_t a);
    t_t o;
    o.re = T_W'(sat(a.re, T_W));
    o.im = T_W'(sat(a.im, T_W));
    return o;
  endfunction
  function automatic d_t to_d(cw_t a, int s);
    d_t o;
    o.re = D_W'(sat(rshr(a.re, s), D_W));
    o.im = D_W'(sat(rshr(a.im, s), D_W));
    return o;
  endfunction
  function automatic e_t to_e(cw_t a, int s);
    e_t o;
    o.re = E_W'(sat(rshr(a.re, s), E_W));
    o.im = E_W'(sat(rshr(a.im, s), E_W));
    return o;
  endfunction

  // round a real detection value (D_F fractional bits) to the nearest integer,
  // result still in D_F format
  function automatic logic signed [D_W-1:0] dround(logic signed [D_W-1:0] a);
    w_t x;
    x = rshr(w_t'(a), D_F);
    return D_W'(sat(x <<< D_F, D_W));
  endfunction

  // squared magnitude of an R value, 2*R_F fractional bits
  function automatic w_t mag2_r(r_t a);
    return w_t'(a.re) * w_t'(a.re) + w_t'(a.im) * w_t'(a.im);
  endfunction

  // mu = [[ a / b ]] by comparators, |Re mu|, |Im mu| <= MU_MAX.
  // p = a*conj(b) and d = |b|^2 so that a/b = p/d; each part of p is
  // compared with 0.5 d and 1.5 d instead of dividing.
  function automatic mu_t mu_round(r_t a, r_t b);
    cw_t p;
    w_t d, ar, ai;
    mu_t m;
    int kr, ki;
    p  = cmulc(w_t'(a.re), w_t'(a.im), w_t'(b.re), w_t'(b.im));
    d  = mag2_r(b);
    ar = (p.re < 0) ? -p.re : p.re;
    ai = (p.im < 0) ? -p.im : p.im;
    // 2|p| >= d  <=> |p/d| >= 0.5 ;  2|p| >= 3d <=> |p/d| >= 1.5
    kr = (2 * ar >= 3 * d) ? MU_MAX : (2 * ar >= d) ? 1 : 0;
    ki = (2 * ai >= 3 * d) ? MU_MAX : (2 * ai >= d) ? 1 : 0;
    if (d == 0) begin kr = 0; ki = 0; end
    m.re = MU_W'((p.re < 0) ? -kr : kr);
    m.im = MU_W'((p.im < 0) ? -ki : ki);
    return m;
  endfunction

  // Givens rotation G = [conj(e1) conj(e2); -e2 e1] applied to the column
  // (a; b); results keep E_F extra fraction bits.  The paper prints
  // G = [conj(e1) e2; -e2 e1], identical whenever e2 is real (real r_ii).
  typedef struct packed { cw_t a; cw_t b; } cw2_t;
  function automatic cw2_t grot(e_t e1, e_t e2, w_t ar, w_t ai, w_t br, w_t bi);
    cw2_t o;
    cw_t p1, p2;
    p1 = cmulc(ar, ai, w_t'(e1.re), w_t'(e1.im));
    p2 = cmulc(br, bi, w_t'(e2.re), w_t'(e2.im));
    o.a.re = p1.re + p2.re;
    o.a.im = p1.im + p2.im;
    p1 = cmul(w_t'(e2.re), w_t'(e2.im), ar, ai);
    p2 = cmul(w_t'(e1.re), w_t'(e1.im), br, bi);
    o.b.re = p2.re - p1.re;
    o.b.im = p2.im - p1.im;
    return o;
  endfunction

  // rotate the stored (r,q,q2) of the two cells of one column
  typedef struct packed { rq_t a; rq_t b; } rq2_t;
  function automatic rq2_t givens_apply(e_t e1, e_t e2, rq_t a, rq_t b);
    rq2_t o;
    cw2_t g;
    g = grot(e1, e2, w_t'(a.r.re), w_t'(a.r.im), w_t'(b.r.re), w_t'(b.r.im));
    o.a.r = to_r(g.a, E_F);  o.b.r = to_r(g.b, E_F);
    g = grot(e1, e2, w_t'(a.q.re), w_t'(a.q.im), w_t'(b.q.re), w_t'(b.q.im));
    o.a.q = to_q(g.a, E_F);  o.b.q = to_q(g.b, E_F);
    g = grot(e1, e2, w_t'(a.q2.re), w_t'(a.q2.im), w_t'(b.q2.re), w_t'(b.q2.im));
    o.a.q2 = to_q(g.a, E_F); o.b.q2 = to_q(g.b, E_F);
    return o;
  endfunction

endpackage
