// offdiag_cell -- off-diagonal processing element O_ij of the LRA-detector
// systolic array.
//
// The cell stores r_ij, t_ij, q_ij and (for MMSE) q_i,j+m.  Its operations:
//
//  MODE_LR, data mode (the "#" token arrives on c_in):
//      x_out = (r,t) (no tag), c_out = "#" (passed on along the column).
//  MODE_LR, size-reduction mode (default):
//      x_in carries the diagonal tag (*) -> mu = [[ r / x_in.r ]],
//          r := r - mu*x_in.r, t := t - mu*x_in.t, mu leaves both up and down;
//      otherwise, with mu arriving from above or below,
//          r := r - mu*x_in.r, t := t - mu*x_in.t, mu passes on in its
//          direction of travel.  x_in always passes on to the right.
//      mu is found with comparators (|Re mu|, |Im mu| in {0,1,2}, larger values
//      saturate to 2), not with a divider, as in the published FPGA build.
//  MODE_QY : x_out = x_in + q*y_in, y_out = y_in  (q2 for the y2 half, MMSE)
//  MODE_TX : x_out = x_in + t*y_in, y_out = y_in
//  MODE_RINV : x_out = x_in - r*y_in, y_out = y_in  (x leftwards, y upwards)
//  MODE_SIC  : as MODE_RINV; a super-diagonal cell (SUPER, j = i+1) first
//      rounds y_in: x_out = x_in - r*[[y_in]], y_out = [[y_in]].
//
// The equations follow Figs. 4(b), 12 and 13.  Upper- and lower-triangle
// cells are the same module; the array connects c_in, y from above/below
// to suit their position (lower cells get "#" and mu from the top).
// Own choices: registered outputs (one clock per normalised cycle), separate
// buses for detection data, load > rotation write > column exchange > size
// reduction in priority.
module offdiag_cell
  import lr_pkg::*;
#(
  parameter bit SUPER = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  mode_e  mode,
  input  logic   ld,
  input  r_t     ld_r,
  input  q_t     ld_q,
  input  q_t     ld_q2,
  // lattice reduction
  input  logic   c_in,      // "#" token
  output logic   c_out,
  input  xsr_t   x_in,      // from the left
  output xsr_t   x_out,     // to the right
  input  ymu_t   yu_in,     // mu travelling up (from the cell below)
  output ymu_t   yu_out,
  input  ymu_t   yd_in,     // mu travelling down (from the cell above)
  output ymu_t   yd_out,
  // Givens rotation write-back and column exchange
  input  logic   rw_en,
  input  rq_t    rw_val,
  input  logic   xc_en,
  input  r_t     xc_r,
  input  t_t     xc_t,
  // detection
  input  dm_t    dx_in,
  input  dm_t    dy_in,
  output dm_t    dx_out,
  output dm_t    dy_out,
  input  dm_t    lx_in,     // from the right (RINV, SIC)
  output dm_t    lx_out,    // to the left
  input  dm_t    uy_in,     // from below
  output dm_t    uy_out,    // to above
  // stored values
  output r_t     r,
  output q_t     q,
  output q_t     q2,
  output t_t     t
);

  mu_t  mu_new, mu_use;
  cw_t  p_r, p_t, p_acc, p_bs;
  d_t   acc_in, y_bs;
  logic do_upd;

  always_comb begin
    mu_new = mu_round(r, x_in.r);
    if (x_in.star)     mu_use = mu_new;
    else if (yd_in.v)  mu_use = yd_in.mu;
    else               mu_use = yu_in.mu;
    do_upd = x_in.v && (x_in.star || yd_in.v || yu_in.v);
    p_r    = cmul(w_t'(mu_use.re), w_t'(mu_use.im), w_t'(x_in.r.re), w_t'(x_in.r.im));
    p_t    = cmul(w_t'(mu_use.re), w_t'(mu_use.im), w_t'(x_in.t.re), w_t'(x_in.t.im));
    // matrix-vector step
    acc_in = dx_in.v ? dx_in.d : '0;
    if (mode == MODE_TX)
      p_acc = cmul(w_t'(t.re), w_t'(t.im), w_t'(dy_in.d.re), w_t'(dy_in.d.im));
    else if (dy_in.sel2)
      p_acc = cmul(w_t'(q2.re), w_t'(q2.im), w_t'(dy_in.d.re), w_t'(dy_in.d.im));
    else
      p_acc = cmul(w_t'(q.re), w_t'(q.im), w_t'(dy_in.d.re), w_t'(dy_in.d.im));
    if (mode == MODE_QY) begin
      p_acc.re = rshr(p_acc.re, Q_F);
      p_acc.im = rshr(p_acc.im, Q_F);
    end
    p_acc.re = p_acc.re + w_t'(acc_in.re);
    p_acc.im = p_acc.im + w_t'(acc_in.im);
    // back substitution step
    y_bs = uy_in.v ? uy_in.d : '0;
    if (mode == MODE_SIC && SUPER) begin
      y_bs.re = dround(y_bs.re);
      y_bs.im = dround(y_bs.im);
    end
    p_bs    = cmul(w_t'(r.re), w_t'(r.im), w_t'(y_bs.re), w_t'(y_bs.im));
    p_bs.re = w_t'(lx_in.d.re) - rshr(p_bs.re, R_F);
    p_bs.im = w_t'(lx_in.d.im) - rshr(p_bs.im, R_F);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; q <= '0; q2 <= '0; t <= '0;
      c_out <= 1'b0; x_out <= '0; yu_out <= '0; yd_out <= '0;
      dx_out <= '0; dy_out <= '0; lx_out <= '0; uy_out <= '0;
    end else begin
      c_out <= 1'b0; x_out <= '0; yu_out <= '0; yd_out <= '0;
      dx_out <= '0; dy_out <= '0; lx_out <= '0; uy_out <= '0;

      // ---- stored values ----
      if (ld) begin
        r <= ld_r; q <= ld_q; q2 <= ld_q2; t <= '0;
      end else if (rw_en) begin
        r <= rw_val.r; q <= rw_val.q; q2 <= rw_val.q2;
      end else if (xc_en) begin
        r <= xc_r; t <= xc_t;
      end else if (mode == MODE_LR && do_upd) begin
        r <= to_r('{re: w_t'(r.re) - p_r.re, im: w_t'(r.im) - p_r.im}, 0);
        t <= to_t('{re: w_t'(t.re) - p_t.re, im: w_t'(t.im) - p_t.im});
      end

      // ---- messages ----
      unique case (mode)
        MODE_LR: begin
          if (c_in) begin
            // data mode
            c_out <= 1'b1;
            x_out <= '{v: 1'b1, star: 1'b0, r: r, t: t};
          end else begin
            x_out <= x_in;
          end
          if (x_in.v && x_in.star) begin
            yu_out <= '{v: 1'b1, mu: mu_new};
            yd_out <= '{v: 1'b1, mu: mu_new};
          end else begin
            yu_out <= yu_in;
            yd_out <= yd_in;
          end
        end
        MODE_QY, MODE_TX: begin
          dy_out <= dy_in;
          if (dy_in.v) begin
            dx_out.v    <= 1'b1;
            dx_out.sel2 <= dy_in.sel2;
            dx_out.d    <= to_d(p_acc, 0);
          end
        end
        MODE_RINV, MODE_SIC: begin
          if (uy_in.v) begin
            uy_out.v    <= 1'b1;
            uy_out.sel2 <= 1'b0;
            uy_out.d    <= y_bs;
          end
          if (lx_in.v) begin
            lx_out.v    <= 1'b1;
            lx_out.sel2 <= 1'b0;
            lx_out.d    <= to_d(p_bs, 0);
          end
        end
        default: ;
      endcase
    end
  end

endmodule
