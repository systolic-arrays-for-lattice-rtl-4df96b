// lr_array -- the M x M systolic array of the lattice-reduction-aided MIMO
// detector (Fig. 4(a) of the paper), with the Givens vectoring and rotation
// cells between every two consecutive rows and the switches that let the
// controller pick which row pairs rotate.
//
// Cell (i,j) holds r_ij, q_ij, q_i,j+M (MMSE) and t_ij.  The neighbour links:
//   * x (size reduction, Q^H y, T x_q): left to right along each row;
//   * mu and "#" : along each column; the upper-triangle cells pass them
//     both up and down, the lower-triangle cells receive them from the top;
//   * "#" and d = r_ii from each diagonal cell to the one above-left;
//   * back substitution (R^-1 v and SIC): right to left along each row, the
//     results up each column;
//   * Theta: along the row pair, away from the vectoring cell at column b+1
//     of row pair (b, b+1).
//
// Full size reduction starts when fsr_go (the controller's "#") reaches
// D_MM; it then runs on its own as a wavefront and is over after 3M-3
// normalised cycles (Fact 3 in the paper).  fsr_busy is high while any
// size-reduction message is still in flight.
//
// Controller interface (indices are 0-based; pair b = rows b and b+1):
//   swap[b] : Siegel condition fails for pair b (from D_bb)
//   sw[b]   : switch between D_bb and the vectoring cell of pair b
//             (a one-clock pulse starts the rotation of that pair if swap[b])
//   cswap[b]: one-clock pulse exchanging columns b and b+1 of R and T
// Detection interface: y_top[j] enters column j from the top (QY, TX),
// dx_right[i] leaves row i on the right; v_right[i] enters row i from the
// right (RINV, SIC), x_top[j] leaves column j at the top.
module lr_array
  import lr_pkg::*;
#(
  parameter int M = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  mode_e  mode,
  input  logic   ld,
  input  r_t     ld_r  [M][M],
  input  q_t     ld_q  [M][M],
  input  q_t     ld_q2 [M][M],
  input  logic   fsr_go,
  output logic   fsr_busy,
  output logic [M-2:0] swap,
  input  logic [M-2:0] sw,
  input  logic [M-2:0] cswap,
  output logic   rot_busy,
  input  dm_t    y_top    [M],
  output dm_t    dx_right [M],
  input  dm_t    v_right  [M],
  output dm_t    x_top    [M],
  output r_t     r_o  [M][M],
  output q_t     q_o  [M][M],
  output q_t     q2_o [M][M],
  output t_t     t_o  [M][M]
);

  // ---- cell outputs --------------------------------------------------------
  xsr_t x_o   [M][M];
  logic c_o   [M][M];
  ymu_t yd_o  [M][M];
  ymu_t yu_o  [M][M];
  dm_t  dx_o  [M][M];
  dm_t  dy_o  [M][M];
  dm_t  lx_o  [M][M];
  dm_t  uy_o  [M][M];
  rq_t  rq    [M][M];
  logic m_o   [M];
  logic swap_d[M];
  r_t   d_o   [M];
  // ---- rotation network ------------------------------------------------------
  theta_t th_l_o [M-1][M];
  theta_t th_r_o [M-1][M];
  logic   wr_en  [M-1][M];
  rq_t    wr_a   [M-1][M];
  rq_t    wr_b   [M-1][M];

  // ---- the processing elements -----------------------------------------------
  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < M; j++) begin : g_col
      xsr_t x_in;
      dm_t  dx_in, dy_in, lx_in;
      logic rw_en, xc_en;
      rq_t  rw_val;
      r_t   xc_r;
      t_t   xc_t;

      logic up_en, dn_en, cr_en, cl_en;
      rq_t  up_val, dn_val;
      r_t   cr_r, cl_r;
      t_t   cr_t, cl_t;

      if (j == 0) begin : g_l0
        assign x_in  = '0;
        assign dx_in = '0;
        assign cl_en = 1'b0; assign cl_r = '0; assign cl_t = '0;
      end else begin : g_l
        assign x_in  = x_o[i][j-1];
        assign dx_in = dx_o[i][j-1];
        // column exchange with the left neighbour
        assign cl_en = cswap[j-1]; assign cl_r = r_o[i][j-1]; assign cl_t = t_o[i][j-1];
      end
      if (j == M-1) begin : g_r0
        assign lx_in = v_right[i];
        assign cr_en = 1'b0; assign cr_r = '0; assign cr_t = '0;
      end else begin : g_r
        assign lx_in = lx_o[i][j+1];
        // column exchange with the right neighbour
        assign cr_en = cswap[j]; assign cr_r = r_o[i][j+1]; assign cr_t = t_o[i][j+1];
      end
      if (i == 0) begin : g_t0
        assign dy_in = y_top[j];
        assign dn_en = 1'b0; assign dn_val = '0;
      end else begin : g_t
        assign dy_in = dy_o[i-1][j];
        // lower cell of rotation pair i-1
        assign dn_en = wr_en[i-1][j]; assign dn_val = wr_b[i-1][j];
      end
      if (i == M-1) begin : g_b0
        assign up_en = 1'b0; assign up_val = '0;
      end else begin : g_b
        // upper cell of rotation pair i
        assign up_en = wr_en[i][j]; assign up_val = wr_a[i][j];
      end
      assign rq[i][j] = '{r: r_o[i][j], q: q_o[i][j], q2: q2_o[i][j]};
      assign rw_en  = up_en | dn_en;
      assign rw_val = up_en ? up_val : dn_val;
      assign xc_en  = cr_en | cl_en;
      assign xc_r   = cr_en ? cr_r : cl_r;
      assign xc_t   = cr_en ? cr_t : cl_t;

      if (i == j) begin : g_d
        logic m_in;
        r_t   d_in;
        ymu_t y_in;
        dm_t  uy_out;
        if (i == M-1) begin : g_last
          assign m_in = fsr_go;
          assign d_in = '0;
        end else begin : g_mid
          assign m_in = m_o[i+1];
          assign d_in = d_o[i+1];
        end
        if (i == 0) begin : g_first
          assign y_in = '0;
        end else begin : g_next
          assign y_in = yd_o[i-1][j];
        end
        diag_cell #(.IS_LAST(i == M-1)) u_cell (
          .clk, .rst_n, .mode,
          .ld, .ld_r(ld_r[i][j]), .ld_q(ld_q[i][j]), .ld_q2(ld_q2[i][j]),
          .m_in, .d_in, .m_out(m_o[i]), .d_out(d_o[i]), .c_out(c_o[i][j]),
          .swap(swap_d[i]),
          .x_in, .x_out(x_o[i][j]), .y_in, .y_out(yd_o[i][j]),
          .rw_en, .rw_val, .xc_en, .xc_r, .xc_t,
          .dx_in, .dy_in, .dx_out(dx_o[i][j]), .dy_out(dy_o[i][j]),
          .lx_in, .uy_out,
          .r(r_o[i][j]), .q(q_o[i][j]), .q2(q2_o[i][j]), .t(t_o[i][j])
        );
        assign uy_o[i][j] = uy_out;
        assign lx_o[i][j] = '0;      // the back-substitution row ends here
        assign yu_o[i][j] = '0;      // mu never travels up out of D_jj
      end else begin : g_o
        logic c_in;
        ymu_t yu_in, yd_in;
        dm_t  uy_in;
        // upper cells get "#" and up-going mu from below, lower cells from above
        if (i < j) begin : g_up
          assign c_in = c_o[i+1][j];
          if (i + 1 < j) begin : g_yu
            assign yu_in = yu_o[i+1][j];
          end else begin : g_yu0
            assign yu_in = '0;
          end
        end else begin : g_lo
          assign c_in  = c_o[i-1][j];
          assign yu_in = '0;
        end
        if (i == 0) begin : g_yd0
          assign yd_in = '0;
        end else begin : g_yd
          assign yd_in = yd_o[i-1][j];
        end
        if (i == M-1) begin : g_uy0
          assign uy_in = '0;
        end else begin : g_uy
          assign uy_in = uy_o[i+1][j];
        end
        offdiag_cell #(.SUPER(j == i+1)) u_cell (
          .clk, .rst_n, .mode,
          .ld, .ld_r(ld_r[i][j]), .ld_q(ld_q[i][j]), .ld_q2(ld_q2[i][j]),
          .c_in, .c_out(c_o[i][j]),
          .x_in, .x_out(x_o[i][j]),
          .yu_in, .yu_out(yu_o[i][j]), .yd_in, .yd_out(yd_o[i][j]),
          .rw_en, .rw_val, .xc_en, .xc_r, .xc_t,
          .dx_in, .dy_in, .dx_out(dx_o[i][j]), .dy_out(dy_o[i][j]),
          .lx_in, .lx_out(lx_o[i][j]), .uy_in, .uy_out(uy_o[i][j]),
          .r(r_o[i][j]), .q(q_o[i][j]), .q2(q2_o[i][j]), .t(t_o[i][j])
        );
      end
    end
    assign dx_right[i] = dx_o[i][M-1];
    assign x_top[i]    = uy_o[0][i];
  end

  // swap flags of the diagonal cells (the last one has none)
  for (genvar b = 0; b < M-1; b++) begin : g_swap
    assign swap[b] = swap_d[b];
  end

  // ---- vectoring and rotation cells between rows b and b+1 -------------------
  for (genvar b = 0; b < M-1; b++) begin : g_pair
    for (genvar c = 0; c < M; c++) begin : g_rc
      if (c == b + 1) begin : g_v
        vectoring_cell u_vec (
          .clk, .rst_n,
          .en(swap[b] & sw[b]),
          .a(rq[b][c]), .b(rq[b+1][c]),
          .wr_en(wr_en[b][c]), .wr_a(wr_a[b][c]), .wr_b(wr_b[b][c]),
          .theta_l(th_l_o[b][c]), .theta_r(th_r_o[b][c])
        );
      end else begin : g_r
        theta_t tl_in, tr_in;
        if (c == 0) begin : g_tl0
          assign tl_in = '0;
        end else begin : g_tl
          assign tl_in = th_r_o[b][c-1];
        end
        if (c == M-1) begin : g_tr0
          assign tr_in = '0;
        end else begin : g_tr
          assign tr_in = th_l_o[b][c+1];
        end
        rotation_cell u_rot (
          .clk, .rst_n,
          .theta_l_in(tl_in), .theta_r_in(tr_in),
          .theta_l_out(th_l_o[b][c]), .theta_r_out(th_r_o[b][c]),
          .a(rq[b][c]), .b(rq[b+1][c]),
          .wr_en(wr_en[b][c]), .wr_a(wr_a[b][c]), .wr_b(wr_b[b][c])
        );
      end
    end
  end

  // ---- activity flags ------------------------------------------------------------
  always_comb begin
    fsr_busy = fsr_go;
    rot_busy = 1'b0;
    for (int i = 0; i < M; i++) begin
      fsr_busy |= m_o[i];
      for (int j = 0; j < M; j++)
        fsr_busy |= x_o[i][j].v | c_o[i][j] | yd_o[i][j].v | yu_o[i][j].v;
    end
    for (int b = 0; b < M-1; b++)
      for (int c = 0; c < M; c++)
        rot_busy |= wr_en[b][c] | th_l_o[b][c].v | th_r_o[b][c].v;
  end

endmodule
