// rotation_cell -- Givens rotation cell between two rows of the
// LRA-detector systolic array.
//
// A valid angle Theta arriving from the left or from the right is applied to
// the column it sits in:  (alpha'; beta') = G(Theta) (alpha; beta), where alpha
// is the content (r, q, q2) of the cell above and beta that of the cell below,
// and G = [conj(eta1) conj(eta2); -eta2 eta1].  Theta then moves on, one
// clock later, in the same direction, so that the rotation sweeps the row
// pair one column per clock (Fig. 6, Fig. 4(a)).
//
// Own choices: a rotation cell rotates r, q and q2 of its column in the same
// clock; the write-back values are combinational and registered by the two
// cells; the conjugated second column of G is explained in vectoring_cell.
module rotation_cell
  import lr_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  theta_t theta_l_in,   // from the left neighbour, travelling right
  input  theta_t theta_r_in,   // from the right neighbour, travelling left
  output theta_t theta_l_out,  // to the left neighbour
  output theta_t theta_r_out,  // to the right neighbour
  input  rq_t    a,
  input  rq_t    b,
  output logic   wr_en,
  output rq_t    wr_a,
  output rq_t    wr_b
);
  theta_t th;
  rq2_t   g;
  always_comb begin
    th    = theta_l_in.v ? theta_l_in : theta_r_in;
    g     = givens_apply(th.e1, th.e2, a, b);
    wr_en = th.v;
    wr_a  = g.a;
    wr_b  = g.b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta_l_out <= '0;
      theta_r_out <= '0;
    end else begin
      theta_r_out <= theta_l_in;
      theta_l_out <= theta_r_in;
    end
  end
endmodule
