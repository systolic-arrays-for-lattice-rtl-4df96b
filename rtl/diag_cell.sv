// diag_cell -- diagonal processing element D_ii of the LRA-detector systolic
// array.
//
// The cell stores r_ii, t_ii, q_ii and (for MMSE) q_i,i+m.  What it does
// depends on the array mode and on the control tokens that reach it:
//
//  MODE_LR, data mode (the "#" token arrives on m_in from D_i+1,i+1):
//      m_out = c_out = "#", d_out = r, x_out = (r,t) with the diagonal tag (*),
//      swap  = |d_in|^2 < (delta-1/2)|r|^2   (Siegel condition, delta = 0.99).
//      The squared form avoids the division and the square root.
//  MODE_LR, size-reduction mode (default):
//      t := t - y_in * x_in.t ; y_out = y_in ; x_out = x_in.
//      r_ii is not changed by size reduction.
//  MODE_QY : x_out = x_in + q * y_in, y_out = y_in (q2 when y_in is the y2 half)
//  MODE_TX : x_out = x_in + t * y_in, y_out = y_in
//  MODE_RINV / MODE_SIC : uy_out = lx_in / r  (lx_in arrives from the right,
//      the quotient leaves upwards).  The division is lx_in*conj(r)*(1/|r|^2)
//      with 1/|r|^2 from a Newton-Raphson reciprocal.
//
// The mode equations are those of Figs. 4(b), 12 and 13 of the paper.  The
// IS_LAST cell (D_mm) only relays "#" and its r to D_m-1,m-1, as the text and
// the flow chart of the full size reduction describe.  Own choices: the
// detection data travel on buses separate from the size-reduction buses, the
// token and data outputs are registered (one clock per normalised cycle), and
// load > rotation write > column exchange > size reduction in priority.
//
// Interface: rw_en/rw_val overwrite (r,q,q2) with the result of the Givens
// rotation computed by the vectoring or rotation cell next to it; xc_en
// overwrites (r,t) with the neighbour's values during a column swap.
module diag_cell
  import lr_pkg::*;
#(
  parameter bit IS_LAST = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  mode_e  mode,
  // load of R and Q^H from the QR decomposition; t is set to 1
  input  logic   ld,
  input  r_t     ld_r,
  input  q_t     ld_q,
  input  q_t     ld_q2,
  // lattice reduction: control tokens
  input  logic   m_in,      // "#" from D_i+1,i+1 (or the controller)
  input  r_t     d_in,      // r_i+1,i+1 travelling with the "#"
  output logic   m_out,     // "#" to D_i-1,i-1
  output r_t     d_out,     // r_ii to D_i-1,i-1
  output logic   c_out,     // "#" to the cells above and below
  output logic   swap,      // Siegel condition violated for rows i, i+1
  // lattice reduction: data
  input  xsr_t   x_in,      // from the left
  output xsr_t   x_out,     // to the right
  input  ymu_t   y_in,      // mu from above
  output ymu_t   y_out,     // mu to below
  // Givens rotation write-back and column exchange
  input  logic   rw_en,
  input  rq_t    rw_val,
  input  logic   xc_en,
  input  r_t     xc_r,
  input  t_t     xc_t,
  // detection
  input  dm_t    dx_in,     // partial sum from the left   (QY, TX)
  input  dm_t    dy_in,     // vector element from above   (QY, TX)
  output dm_t    dx_out,
  output dm_t    dy_out,
  input  dm_t    lx_in,     // partial sum from the right  (RINV, SIC)
  output dm_t    uy_out,    // quotient upwards            (RINV, SIC)
  // stored values
  output r_t     r,
  output q_t     q,
  output q_t     q2,
  output t_t     t
);

  // ---- reciprocal of |r|^2 for the detection division ------------------------
  localparam int RCP_F = 16;
  logic [35:0] rmag2;
  logic [31:0] rcp;
  always_comb rmag2 = 36'(mag2_r(r));
  nr_recip #(.IN_W(36), .IN_F(2 * R_F), .OUT_W(32), .OUT_F(RCP_F), .RSQRT(1'b0))
    u_rcp (.a(rmag2), .y(rcp));

  // ---- combinational next values -----------------------------------------------
  cw_t  p_t, p_acc, p_div;
  w_t   d2, r2c;
  d_t   acc_in;
  mu_t  mu_y;
  always_comb begin
    mu_y   = y_in.mu;
    // size reduction of t by the mu passing down the column
    p_t    = cmul(w_t'(mu_y.re), w_t'(mu_y.im), w_t'(x_in.t.re), w_t'(x_in.t.im));
    // Siegel check, both sides with 2*R_F+SIEGEL_F fraction bits
    d2     = mag2_r(d_in) <<< SIEGEL_F;
    r2c    = w_t'(SIEGEL_C) * mag2_r(r);
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
    // division lx_in / r = lx_in * conj(r) / |r|^2
    p_div    = cmulc(w_t'(lx_in.d.re), w_t'(lx_in.d.im), w_t'(r.re), w_t'(r.im));
    p_div.re = rshr(p_div.re, R_F) * w_t'({1'b0, rcp});
    p_div.im = rshr(p_div.im, R_F) * w_t'({1'b0, rcp});
  end

  // ---- registers ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; q <= '0; q2 <= '0; t <= '0;
      m_out <= 1'b0; d_out <= '0; c_out <= 1'b0; swap <= 1'b0;
      x_out <= '0; y_out <= '0;
      dx_out <= '0; dy_out <= '0; uy_out <= '0;
    end else begin
      // defaults: no tokens, no messages
      m_out <= 1'b0; c_out <= 1'b0;
      x_out <= '0; y_out <= '0;
      dx_out <= '0; dy_out <= '0; uy_out <= '0;

      // ---- stored values ----
      if (ld) begin
        r  <= ld_r; q <= ld_q; q2 <= ld_q2;
        t  <= '{re: T_W'(1), im: '0};
        swap <= 1'b0;
      end else if (rw_en) begin
        r  <= rw_val.r; q <= rw_val.q; q2 <= rw_val.q2;
      end else if (xc_en) begin
        r  <= xc_r; t <= xc_t;
      end else if (mode == MODE_LR && x_in.v && y_in.v) begin
        t  <= to_t('{re: w_t'(t.re) - p_t.re, im: w_t'(t.im) - p_t.im});
      end

      // ---- messages ----
      unique case (mode)
        MODE_LR: begin
          if (m_in) begin
            m_out <= 1'b1;
            d_out <= r;
            if (!IS_LAST) begin
              // data mode
              c_out <= 1'b1;
              x_out <= '{v: 1'b1, star: 1'b1, r: r, t: t};
              swap  <= (d2 < r2c);
            end
          end else begin
            // size-reduction mode
            x_out <= x_in;
          end
          y_out <= y_in;
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
          if (lx_in.v) begin
            uy_out.v    <= 1'b1;
            uy_out.sel2 <= 1'b0;
            uy_out.d    <= to_d(p_div, RCP_F);
          end
        end
        default: ;
      endcase
    end
  end

endmodule
