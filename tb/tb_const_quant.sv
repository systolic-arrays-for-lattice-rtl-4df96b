// tb_const_quant -- self-checking testbench of const_quant (the
// constellation quantiser Q(.)), 16-QAM.
// Random values, many of them outside the constellation, are compared with
// min(max(floor(x + 1/2), 0), sqrt(QAM)-1) computed here from the real value.
module tb_const_quant;
  import lr_pkg::*;
  localparam int QAM  = 16;
  localparam int QMAX = 3;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  int   n_clip = 0;
  d_t   x;
  t_t   s;

  const_quant #(.QAM(QAM)) dut (.x, .s);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(logic signed [D_W-1:0] a);
    real v;
    int  k;
    v = real'(a) / real'(1 << D_F);
    k = int'($floor(v + 0.5));
    if (k < 0) k = 0;
    if (k > QMAX) k = QMAX;
    return k;
  endfunction

  initial begin
    x = '0;
    for (int n = 0; n < 3000; n++) begin
      int er, ei;
      // values in roughly [-4, 8)
      x.re = D_W'(int'($urandom_range(0, 12 << D_F)) - (4 << D_F));
      x.im = D_W'(int'($urandom_range(0, 12 << D_F)) - (4 << D_F));
      @(posedge clk);
      er = ref_q(x.re);
      ei = ref_q(x.im);
      if (x.re < -(1 << (D_F - 1)) || x.re >= ((QMAX << D_F) + (1 << (D_F - 1)))) n_clip++;
      checks++;
      if (int'(s.re) != er || int'(s.im) != ei) begin
        failures++;
        $display("FAIL x=(%0d,%0d) got (%0d,%0d) exp (%0d,%0d)", x.re, x.im, s.re, s.im, er, ei);
      end
    end
    checks++;
    if (n_clip == 0) begin failures++; $display("FAIL no clipping exercised"); end
    $display("clipped inputs: %0d", n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
