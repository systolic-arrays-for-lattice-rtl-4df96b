// round_unit -- element-wise rounding of the linear-detection estimate
// x_hat to the nearest Gaussian integer (the "Rounding" block between
// H~^+ and T in the LRA detector).  Each real and imaginary part is rounded
// to the nearest integer, halves upwards; the result keeps the detection
// data format (D_W, D_F) so that it can go straight back into the array.
// Combinational.  The paper places this step outside the systolic array;
// the tie rule is this design's own choice.
module round_unit
  import lr_pkg::*;
(
  input  d_t x,
  output d_t xq
);
  always_comb begin
    xq.re = dround(x.re);
    xq.im = dround(x.im);
  end
endmodule
