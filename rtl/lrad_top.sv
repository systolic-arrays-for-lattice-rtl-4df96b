// lrad_top -- lattice-reduction-aided MIMO detector on one M x M systolic
// array (M transmit and M receive antennas).
//
// A QR decomposition done elsewhere loads Q^H (and for MMSE the second half
// Q2 of the extended Q^H) and R into the cells (ld).  lr_start then runs
// lattice reduction in place -- FSR-LLL (algo = 0) or ASLR (algo = 1), both
// with the Siegel condition and delta = 0.99 -- leaving Q~^H, R~ and the
// unimodular T in the cells.  Each det_start afterwards detects one received
// vector y (and y2 for MMSE) by linear detection (sic = 0) or successive
// interference cancellation (sic = 1) on the same array, ending with the
// decision x_lr on the scaled QAM lattice {0..sqrt(QAM)-1}^2.
//
// Blocks: lr_array (cells, vectoring/rotation cells, switches),
// lr_controller (FSR-LLL / ASLR flow) and det_controller (detection flow,
// with the MMSE combiner, rounding and constellation quantiser).  The
// array's mode is MODE_LR while the lattice reduction runs and otherwise the
// detection controller's.  lr_start and det_start must not overlap.
// The stored R~, Q~^H, T are brought out for inspection.
module lrad_top
  import lr_pkg::*;
#(
  parameter int M        = 4,
  parameter int QAM      = 16,
  parameter int MAX_ITER = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // channel load (from the QR decomposition)
  input  logic        ld,
  input  r_t          ld_r  [M][M],
  input  q_t          ld_q  [M][M],
  input  q_t          ld_q2 [M][M],
  // lattice reduction
  input  logic        algo,
  input  logic        lr_start,
  output logic        lr_busy,
  output logic        lr_done,
  output logic        lr_hit_limit,
  output logic [15:0] lr_iter,
  output logic [15:0] lr_swaps,
  output logic [15:0] lr_pairs,
  output logic [15:0] lr_cycles,
  // detection
  input  logic        det_start,
  input  logic        sic,
  input  logic        mmse,
  input  d_t          y  [M],
  input  d_t          y2 [M],
  output logic        det_busy,
  output logic        det_done,
  output d_t          v    [M],
  output d_t          xhat [M],
  output d_t          xq   [M],
  output d_t          tx   [M],
  output t_t          x_lr [M],
  output logic [1:0]  v_words [M],
  output logic [15:0] det_cycles,
  // stored matrices
  output r_t          r_o  [M][M],
  output q_t          q_o  [M][M],
  output q_t          q2_o [M][M],
  output t_t          t_o  [M][M]
);
  mode_e        mode, det_mode;
  logic         fsr_go, fsr_busy, rot_busy;
  logic [M-2:0] swap, sw, cswap;
  dm_t          y_top [M], dx_right [M], v_right [M], x_top [M];

  assign mode = lr_busy ? MODE_LR : det_mode;

  lr_array #(.M(M)) u_array (
    .clk, .rst_n, .mode, .ld, .ld_r, .ld_q, .ld_q2,
    .fsr_go, .fsr_busy, .swap, .sw, .cswap, .rot_busy,
    .y_top, .dx_right, .v_right, .x_top,
    .r_o, .q_o, .q2_o, .t_o
  );

  lr_controller #(.M(M), .MAX_ITER(MAX_ITER)) u_lrc (
    .clk, .rst_n, .start(lr_start), .algo,
    .fsr_go, .fsr_busy, .swap, .sw, .cswap, .rot_busy,
    .busy(lr_busy), .done(lr_done), .hit_limit(lr_hit_limit),
    .n_iter(lr_iter), .n_swap(lr_swaps), .n_pairs(lr_pairs), .cycles(lr_cycles)
  );

  det_controller #(.M(M), .QAM(QAM)) u_det (
    .clk, .rst_n, .start(det_start), .sic, .mmse, .y, .y2,
    .mode(det_mode), .y_top, .dx_right, .v_right, .x_top,
    .busy(det_busy), .done(det_done), .v, .xhat, .xq, .tx, .x_lr, .v_words,
    .det_cycles
  );
endmodule
