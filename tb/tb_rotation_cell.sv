// tb_rotation_cell -- self-checking testbench of rotation_cell.
// Random unitary angles Theta = (eta1, eta2) are applied from the left or
// from the right to random cell contents (r, q, q2).  The write-back values
// are compared with G(Theta)(alpha; beta), G = [conj(eta1) conj(eta2);
// -eta2 eta1], computed here in floating point; Theta must leave on the
// opposite side exactly one clock later and not at all when no angle came.
module tb_rotation_cell;
  import lr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  theta_t tl_in, tr_in, tl_out, tr_out;
  rq_t    a, b, wa, wb;
  logic   wr_en;

  rotation_cell dut (.clk, .rst_n, .theta_l_in(tl_in), .theta_r_in(tr_in),
                     .theta_l_out(tl_out), .theta_r_out(tr_out),
                     .a, .b, .wr_en, .wr_a(wa), .wr_b(wb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real lim);
    return (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * lim;
  endfunction

  task automatic near(string what, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  // apply G to complex (ar,ai),(br,bi)
  task automatic gref(real e1r, real e1i, real e2r, real e2i,
                      real ar, real ai, real br, real bi,
                      output real xr, output real xi, output real yr, output real yi);
    xr = e1r * ar + e1i * ai + e2r * br + e2i * bi;
    xi = e1r * ai - e1i * ar + e2r * bi - e2i * br;
    yr = -(e2r * ar - e2i * ai) + (e1r * br - e1i * bi);
    yi = -(e2r * ai + e2i * ar) + (e1r * bi + e1i * br);
  endtask

  localparam real RS = real'(1 << R_F), QS = real'(1 << Q_F), ES = real'(1 << E_F);

  initial begin
    int n_l = 0, n_r = 0;
    tl_in = '0; tr_in = '0; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1500; n++) begin
      real e1r, e1i, e2r, e2i, nn, xr, xi, yr, yi;
      theta_t th;
      logic from_left, none;
      e1r = rnd(1.0); e1i = rnd(1.0); e2r = rnd(1.0); e2i = rnd(1.0);
      nn = $sqrt(e1r * e1r + e1i * e1i + e2r * e2r + e2i * e2i) + 1e-9;
      th.v = 1'b1;
      th.e1.re = E_W'(int'(e1r / nn * ES)); th.e1.im = E_W'(int'(e1i / nn * ES));
      th.e2.re = E_W'(int'(e2r / nn * ES)); th.e2.im = E_W'(int'(e2i / nn * ES));
      a.r.re = R_W'(int'(rnd(4.0) * RS));   a.r.im = R_W'(int'(rnd(4.0) * RS));
      b.r.re = R_W'(int'(rnd(4.0) * RS));   b.r.im = R_W'(int'(rnd(4.0) * RS));
      a.q.re = Q_W'(int'(rnd(0.35) * QS));  a.q.im = Q_W'(int'(rnd(0.35) * QS));
      b.q.re = Q_W'(int'(rnd(0.35) * QS));  b.q.im = Q_W'(int'(rnd(0.35) * QS));
      a.q2.re = Q_W'(int'(rnd(0.35) * QS)); a.q2.im = Q_W'(int'(rnd(0.35) * QS));
      b.q2.re = Q_W'(int'(rnd(0.35) * QS)); b.q2.im = Q_W'(int'(rnd(0.35) * QS));
      none = ($urandom_range(0, 4) == 0);
      from_left = $urandom_range(0, 1);
      @(negedge clk);
      tl_in = (!none && from_left)  ? th : '0;
      tr_in = (!none && !from_left) ? th : '0;
      #1;
      checks++;
      if (wr_en != !none) begin failures++; $display("FAIL wr_en %b", wr_en); end
      if (!none) begin
        e1r = real'(th.e1.re) / ES; e1i = real'(th.e1.im) / ES;
        e2r = real'(th.e2.re) / ES; e2i = real'(th.e2.im) / ES;
        gref(e1r, e1i, e2r, e2i, real'(a.r.re) / RS, real'(a.r.im) / RS,
             real'(b.r.re) / RS, real'(b.r.im) / RS, xr, xi, yr, yi);
        near("a.r.re", real'(wa.r.re) / RS, xr, 1e-3); near("a.r.im", real'(wa.r.im) / RS, xi, 1e-3);
        near("b.r.re", real'(wb.r.re) / RS, yr, 1e-3); near("b.r.im", real'(wb.r.im) / RS, yi, 1e-3);
        gref(e1r, e1i, e2r, e2i, real'(a.q.re) / QS, real'(a.q.im) / QS,
             real'(b.q.re) / QS, real'(b.q.im) / QS, xr, xi, yr, yi);
        near("a.q.re", real'(wa.q.re) / QS, xr, 5e-4); near("a.q.im", real'(wa.q.im) / QS, xi, 5e-4);
        near("b.q.re", real'(wb.q.re) / QS, yr, 5e-4); near("b.q.im", real'(wb.q.im) / QS, yi, 5e-4);
        gref(e1r, e1i, e2r, e2i, real'(a.q2.re) / QS, real'(a.q2.im) / QS,
             real'(b.q2.re) / QS, real'(b.q2.im) / QS, xr, xi, yr, yi);
        near("a.q2.re", real'(wa.q2.re) / QS, xr, 5e-4); near("b.q2.im", real'(wb.q2.im) / QS, yi, 5e-4);
      end
      @(posedge clk); #1;
      tl_in = '0; tr_in = '0;
      // one clock later Theta is on the far side, and only there
      checks++;
      if (none) begin
        if (tl_out.v || tr_out.v) begin failures++; $display("FAIL spurious theta"); end
      end else if (from_left) begin
        n_l++;
        if (tr_out != th || tl_out.v) begin failures++; $display("FAIL theta not passed right"); end
      end else begin
        n_r++;
        if (tl_out != th || tr_out.v) begin failures++; $display("FAIL theta not passed left"); end
      end
    end
    checks++;
    if (n_l == 0 || n_r == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
