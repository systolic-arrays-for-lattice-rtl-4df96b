// const_quant -- the constellation quantiser Q(.) at the end of LRA
// detection.  T * x_q may land outside the QAM constellation; each part is
// rounded to an integer and then clipped into [0, sqrt(QAM)-1], which moves
// a point outside the boundary to the closest constellation point.
//
// The array works on the integer lattice of the scaled and shifted QAM
// alphabet, {0, ..., sqrt(QAM)-1} per part (the paper only says the
// constellation is scaled and shifted onto a square integer lattice; this
// particular mapping is this design's choice).  Combinational.
module const_quant
  import lr_pkg::*;
#(
  parameter int QAM = 16
) (
  input  d_t x,
  output t_t s
);
  localparam int QMAX = (QAM == 4) ? 1 : (QAM == 16) ? 3 : (QAM == 64) ? 7 : 15;
  function automatic logic signed [T_W-1:0] q1(logic signed [D_W-1:0] a);
    w_t val;
    val = rshr(w_t'(a), D_F);
    if (val < 0) val = 0;
    if (val > w_t'(QMAX)) val = w_t'(QMAX);
    return T_W'(val);
  endfunction
  always_comb begin
    s.re = q1(x.re);
    s.im = q1(x.im);
  end
endmodule
