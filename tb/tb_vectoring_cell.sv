// tb_vectoring_cell -- self-checking testbench of vectoring_cell.
// For random (alpha, beta) the cell must, in the clock it is enabled, write
// back r = (||(alpha_r, beta_r)||; 0) and the rotated q, q2 entries, and one
// clock later send Theta = (alpha_r, beta_r)/norm to both sides.  The
// references are computed here in floating point.  With en low nothing may
// be written and no angle sent.
module tb_vectoring_cell;
  import lr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic   en, wr_en;
  rq_t    a, b, wa, wb;
  theta_t thl, thr;

  vectoring_cell dut (.clk, .rst_n, .en, .a, .b, .wr_en, .wr_a(wa), .wr_b(wb),
                      .theta_l(thl), .theta_r(thr));

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

  localparam real RS = real'(1 << R_F), QS = real'(1 << Q_F), ES = real'(1 << E_F);

  initial begin
    en = 1'b0; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1500; n++) begin
      real ar, ai, br, bi, nrm, e1r, e1i, e2r, e2i, qar, qai, qbr, qbi;
      logic on;
      a.r.re = R_W'(int'(rnd(3.0) * RS));   a.r.im = R_W'(int'(rnd(3.0) * RS));
      b.r.re = R_W'(int'(rnd(3.0) * RS));   b.r.im = R_W'(int'(rnd(3.0) * RS));
      if (n % 7 == 0) b.r.im = '0;          // real r_ii as after a QR
      a.q.re = Q_W'(int'(rnd(0.35) * QS));  a.q.im = Q_W'(int'(rnd(0.35) * QS));
      b.q.re = Q_W'(int'(rnd(0.35) * QS));  b.q.im = Q_W'(int'(rnd(0.35) * QS));
      a.q2.re = Q_W'(int'(rnd(0.35) * QS)); a.q2.im = Q_W'(int'(rnd(0.35) * QS));
      b.q2.re = Q_W'(int'(rnd(0.35) * QS)); b.q2.im = Q_W'(int'(rnd(0.35) * QS));
      on = ($urandom_range(0, 3) != 0);
      ar = real'(a.r.re) / RS; ai = real'(a.r.im) / RS;
      br = real'(b.r.re) / RS; bi = real'(b.r.im) / RS;
      nrm = $sqrt(ar * ar + ai * ai + br * br + bi * bi);
      if (nrm < 0.05) continue;
      e1r = ar / nrm; e1i = ai / nrm; e2r = br / nrm; e2i = bi / nrm;
      @(negedge clk);
      en = on;
      #1;
      checks++;
      if (wr_en != on) begin failures++; $display("FAIL wr_en"); end
      if (on) begin
        near("r_a.re", real'(wa.r.re) / RS, nrm, 2e-3);
        near("r_a.im", real'(wa.r.im) / RS, 0.0, 2e-3);
        checks++;
        if (wb.r != '0) begin failures++; $display("FAIL beta not zeroed"); end
        qar = real'(a.q.re) / QS; qai = real'(a.q.im) / QS;
        qbr = real'(b.q.re) / QS; qbi = real'(b.q.im) / QS;
        near("q_a.re", real'(wa.q.re) / QS, e1r * qar + e1i * qai + e2r * qbr + e2i * qbi, 5e-4);
        near("q_a.im", real'(wa.q.im) / QS, e1r * qai - e1i * qar + e2r * qbi - e2i * qbr, 5e-4);
        near("q_b.re", real'(wb.q.re) / QS, -(e2r * qar - e2i * qai) + e1r * qbr - e1i * qbi, 5e-4);
        near("q_b.im", real'(wb.q.im) / QS, -(e2r * qai + e2i * qar) + e1r * qbi + e1i * qbr, 5e-4);
        qar = real'(a.q2.re) / QS; qbr = real'(b.q2.re) / QS;
        qai = real'(a.q2.im) / QS; qbi = real'(b.q2.im) / QS;
        near("q2_b.re", real'(wb.q2.re) / QS, -(e2r * qar - e2i * qai) + e1r * qbr - e1i * qbi, 5e-4);
      end
      @(posedge clk); #1;
      en = 1'b0;
      checks++;
      if (thl.v != on || thr.v != on) begin failures++; $display("FAIL theta valid"); end
      if (on) begin
        near("eta1.re", real'(thl.e1.re) / ES, e1r, 3e-4);
        near("eta1.im", real'(thl.e1.im) / ES, e1i, 3e-4);
        near("eta2.re", real'(thr.e2.re) / ES, e2r, 3e-4);
        near("eta2.im", real'(thr.e2.im) / ES, e2i, 3e-4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
