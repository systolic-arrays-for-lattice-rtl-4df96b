// nr_recip -- Newton-Raphson reciprocal (1/a) or reciprocal square root
// (1/sqrt(a)) of an unsigned fixed-point number.
//
// The divisions of the array -- 1/|r_ii|^2 in the diagonal cells for back
// substitution and 1/||(alpha,beta)|| in the vectoring cells for the Givens
// rotation -- are done with Newton-Raphson iterations, as in the published
// FPGA build.  The iteration counts, the seeds and the internal precision are
// this design's own choices.
//
// How it works: the input a = A * 2^-IN_F is normalised by its leading one to
// an in [0.5,1) (or [0.25,1) with an even exponent for the square root).
//   reciprocal   : x0 = 48/17 - 32/17*an,  x <- x(2 - an x),        3 steps
//   rec. sqrt    : x0 = 2.2 - 1.2*an,      x <- x(3 - an x^2)/2,    5 steps
// The result is shifted back by the exponent and saturated to OUT_W bits
// with OUT_F fractional bits.  a = 0 gives the largest output value.
//
// Timing: purely combinational; the cells that use it register its result.
module nr_recip #(
  parameter int  IN_W  = 40,
  parameter int  IN_F  = 26,
  parameter int  OUT_W = 32,
  parameter int  OUT_F = 16,
  parameter bit  RSQRT = 1'b0
) (
  input  logic [IN_W-1:0]  a,
  output logic [OUT_W-1:0] y
);
  localparam int FR = 30;                 // internal fraction bits

  logic signed [63:0] an, x, t, res, maxv;
  int p, e, sh;

  always_comb begin
    p  = -1;
    for (int i = 0; i < IN_W; i++) if (a[i]) p = i;
    maxv = (64'sd1 <<< OUT_W) - 1;
    an = '0; x = '0; t = '0; e = 0; sh = 0; res = '0;
    if (p < 0) begin
      y = OUT_W'(maxv);
    end else begin
      // an = A * 2^-(p+1) in FR fraction bits, a = an * 2^e
      an = (p + 1 >= FR) ? 64'(a) >>> (p + 1 - FR) : 64'(a) <<< (FR - p - 1);
      e  = p + 1 - IN_F;
      if (!RSQRT) begin
        x = ((64'sd48 <<< FR) - 64'sd32 * an) / 17;
        for (int k = 0; k < 3; k++) begin
          t = (an * x) >>> FR;                 // an*x
          x = (x * ((64'sd2 <<< FR) - t)) >>> FR;
        end
        // 1/a = x * 2^-e
        sh = FR - OUT_F + e;
      end else begin
        if (e % 2 != 0) begin                  // make the exponent even
          an = an >>> 1;
          e  = e + 1;
        end
        x = ((64'sd22 <<< FR) - 64'sd12 * an) / 10;
        for (int k = 0; k < 5; k++) begin
          t = (x * x) >>> FR;                  // x^2
          t = (an * t) >>> FR;                 // an*x^2
          x = (x * ((64'sd3 <<< FR) - t)) >>> (FR + 1);
        end
        // 1/sqrt(a) = x * 2^-(e/2)
        sh = FR - OUT_F + e / 2;
      end
      if (sh >= 0) res = x >>> sh;
      else if (-sh >= OUT_W) res = maxv;
      else res = x <<< (-sh);
      if (res > maxv || res < 0) res = maxv;
      y = OUT_W'(res);
    end
  end

endmodule
