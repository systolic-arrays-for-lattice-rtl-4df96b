// tb_round_unit -- self-checking testbench of round_unit.
// Drives random detection words (and the half-way ties) and compares each
// part with floor(x + 1/2), computed here from the real value.
module tb_round_unit;
  import lr_pkg::*;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  d_t   x, xq;

  round_unit dut (.x, .xq);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_round(logic signed [D_W-1:0] a);
    real v;
    v = real'(a) / real'(1 << D_F);
    return longint'($floor(v + 0.5));
  endfunction

  task automatic check(d_t in);
    longint er, ei;
    x = in;
    @(posedge clk);
    er = ref_round(in.re) <<< D_F;
    ei = ref_round(in.im) <<< D_F;
    checks++;
    if (longint'(xq.re) != er || longint'(xq.im) != ei) begin
      failures++;
      $display("FAIL x=(%0d,%0d) got (%0d,%0d) exp (%0d,%0d)",
               in.re, in.im, xq.re, xq.im, er, ei);
    end
  endtask

  initial begin
    d_t v;
    x = '0;
    // ties and near-ties
    for (int k = -5; k <= 5; k++) begin
      v.re = D_W'(k * (1 << D_F) + (1 << (D_F - 1)));
      v.im = D_W'(k * (1 << D_F) - (1 << (D_F - 1)) + 1);
      check(v);
    end
    for (int n = 0; n < 2000; n++) begin
      v.re = D_W'($signed($urandom) >>> 12);
      v.im = D_W'($signed($urandom) >>> 12);
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
