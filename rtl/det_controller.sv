// det_controller -- runs lattice-reduction-aided detection of one received
// vector through the systolic array once Q~^H, R~ and T sit in its cells.
//
//   1. Q~^H y  (MODE_QY): y_j enters column j from the top at clock j (the
//      skew of the array); for MMSE the second half y2_j follows one clock
//      later and is multiplied by Q2.  The rows' results leave on the right
//      and the mmse_combiner adds them: v = Q1 y1 (+ Q2 y2).
//   2. R~^-1 v (MODE_RINV, linear detection) or the SIC recursion
//      (MODE_SIC): v_i enters row i from the right at clock M-1-i (v_M
//      first); x_hat_j (or z_hat_j) leaves column j at the top.
//   3. rounding of x_hat to x_q (round_unit, outside the array).
//   4. T x_q   (MODE_TX): x_q enters from the top like y; T x_q leaves on
//      the right and const_quant maps it onto the constellation: x_LR.
//
// The data flows and cell operations are Figs. 11, 12 and 13 of the paper.
// Own choices: each step waits a fixed 2M+2 clocks, enough for the last word
// to cross the array; the outputs are captured by their valid flags.
// done pulses for one clock when x_lr is valid; det_cycles counts the clocks.
module det_controller
  import lr_pkg::*;
#(
  parameter int M   = 4,
  parameter int QAM = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   sic,          // 0 linear detection, 1 SIC
  input  logic   mmse,         // feed y2 after y1
  input  d_t     y   [M],
  input  d_t     y2  [M],
  // array side
  output mode_e  mode,
  output dm_t    y_top   [M],
  input  dm_t    dx_right[M],
  output dm_t    v_right [M],
  input  dm_t    x_top   [M],
  // results
  output logic   busy,
  output logic   done,
  output d_t     v     [M],    // Q~^H y
  output d_t     xhat  [M],    // R~^-1 v (or z_hat for SIC)
  output d_t     xq    [M],    // rounded
  output d_t     tx    [M],    // T x_q
  output t_t     x_lr  [M],    // final decision
  output logic [1:0] v_words [M], // words summed into v[i] (2 for MMSE)
  output logic [15:0] det_cycles
);
  localparam int STEP = 2 * M + 2;
  typedef enum logic [2:0] { S_IDLE, S_QY, S_BS, S_TX, S_FIN } state_e;
  state_e     st;
  logic [7:0] cnt;
  logic       comb_clr;

  mmse_combiner #(.M(M)) u_comb (
    .clk, .rst_n, .clr(comb_clr), .en(st == S_QY), .in(dx_right), .v, .cnt(v_words)
  );

  for (genvar i = 0; i < M; i++) begin : g_out
    round_unit u_rnd (.x(xhat[i]), .xq(xq[i]));
    const_quant #(.QAM(QAM)) u_q (.x(tx[i]), .s(x_lr[i]));
  end

  // input feeding, purely from the step counter
  always_comb begin
    mode = MODE_LR;
    for (int j = 0; j < M; j++) begin
      y_top[j]   = '0;
      v_right[j] = '0;
    end
    unique case (st)
      S_QY: begin
        mode = MODE_QY;
        for (int j = 0; j < M; j++) begin
          if (int'(cnt) == j)                y_top[j] = '{v: 1'b1, sel2: 1'b0, d: y[j]};
          else if (mmse && int'(cnt) == j+1) y_top[j] = '{v: 1'b1, sel2: 1'b1, d: y2[j]};
        end
      end
      S_BS: begin
        mode = sic ? MODE_SIC : MODE_RINV;
        for (int i = 0; i < M; i++)
          if (int'(cnt) == M - 1 - i) v_right[i] = '{v: 1'b1, sel2: 1'b0, d: v[i]};
      end
      S_TX: begin
        mode = MODE_TX;
        for (int j = 0; j < M; j++)
          if (int'(cnt) == j) y_top[j] = '{v: 1'b1, sel2: 1'b0, d: xq[j]};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; busy <= 1'b0; done <= 1'b0; comb_clr <= 1'b0;
      det_cycles <= '0;
      for (int i = 0; i < M; i++) begin xhat[i] <= '0; tx[i] <= '0; end
    end else begin
      done <= 1'b0; comb_clr <= 1'b0;
      if (busy) det_cycles <= det_cycles + 16'd1;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_QY; cnt <= '0; busy <= 1'b1; comb_clr <= 1'b1; det_cycles <= '0;
        end
        S_QY: begin
          cnt <= cnt + 8'd1;
          if (int'(cnt) == STEP - 1) begin st <= S_BS; cnt <= '0; end
        end
        S_BS: begin
          cnt <= cnt + 8'd1;
          for (int j = 0; j < M; j++) if (x_top[j].v) xhat[j] <= x_top[j].d;
          if (int'(cnt) == STEP - 1) begin st <= S_TX; cnt <= '0; end
        end
        S_TX: begin
          cnt <= cnt + 8'd1;
          for (int i = 0; i < M; i++) if (dx_right[i].v) tx[i] <= dx_right[i].d;
          if (int'(cnt) == STEP - 1) st <= S_FIN;
        end
        S_FIN: begin
          st <= S_IDLE; busy <= 1'b0; done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
