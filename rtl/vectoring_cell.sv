// vectoring_cell -- the Givens vectoring cell that sits between the
// off-diagonal cell O_i-1,i (above, alpha) and the diagonal cell D_ii
// (below, beta) of the LRA-detector systolic array.
//
// When its switch is closed by the controller and the diagonal cell above
// it has raised "swap" (en = 1), it computes the rotation that zeroes beta:
//     nrm  = sqrt(|alpha_r|^2 + |beta_r|^2)
//     eta1 = alpha_r / nrm,  eta2 = beta_r / nrm
//     G    = [conj(eta1) conj(eta2); -eta2 eta1]
// and writes G*(alpha;beta) back into both cells: r becomes (nrm; 0) and
// the q and q2 entries of the same two cells are rotated too.  The angle
// Theta = (eta1, eta2) leaves on both sides to the rotation cells of the same
// row pair, one clock later.
//
// The rotation and the cell's place follow Fig. 6, Fig. 4(a) and Table I
// lines 13-16 of the paper.  1/nrm comes from a Newton-Raphson reciprocal
// square root, since the paper implements the rotation's divisions with
// Newton-Raphson.  The second column of G is conjugated so that G stays
// unitary for a complex r_ii; for the real diagonal of a standard QR it is the
// paper's G.  Timing: the write-back values are combinational (the cells
// register them on the same clock edge); Theta is registered.  wr_b.r is
// the zeroed entry and is therefore a constant 0.
module vectoring_cell
  import lr_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,          // swap AND switch
  input  rq_t    a,           // contents of the cell above (O_i-1,i)
  input  rq_t    b,           // contents of the cell below (D_ii)
  output logic   wr_en,       // write-back strobe for both cells
  output rq_t    wr_a,
  output rq_t    wr_b,
  output theta_t theta_l,     // Theta towards the left
  output theta_t theta_r      // Theta towards the right
);
  localparam int INV_F = 16;
  logic [37:0] n2;
  logic [31:0] inv;
  cw_t  p1, p2;
  e_t   e1, e2;
  rq2_t g;

  always_comb n2 = 38'(mag2_r(a.r) + mag2_r(b.r));
  nr_recip #(.IN_W(38), .IN_F(2 * R_F), .OUT_W(32), .OUT_F(INV_F), .RSQRT(1'b1))
    u_rsqrt (.a(n2), .y(inv));

  always_comb begin
    p1 = '{re: w_t'(a.r.re) * w_t'({1'b0, inv}), im: w_t'(a.r.im) * w_t'({1'b0, inv})};
    p2 = '{re: w_t'(b.r.re) * w_t'({1'b0, inv}), im: w_t'(b.r.im) * w_t'({1'b0, inv})};
    e1 = to_e(p1, R_F + INV_F - E_F);
    e2 = to_e(p2, R_F + INV_F - E_F);
    g  = givens_apply(e1, e2, a, b);
    wr_en = en;
    wr_a  = g.a;
    wr_b  = g.b;
    wr_b.r = '0;              // beta is zeroed (Fig. 6)
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta_l <= '0;
      theta_r <= '0;
    end else begin
      theta_l <= '{v: en, e1: e1, e2: e2};
      theta_r <= '{v: en, e1: e1, e2: e2};
    end
  end
endmodule
