// tb_nr_recip -- self-checking testbench of nr_recip in both of its uses:
// the reciprocal 1/|r|^2 of the diagonal cells (IN (36,26), OUT (32,16)) and
// the reciprocal square root of the vectoring cells (IN (38,26), OUT (32,16)).
// Random inputs over the useful range are compared with the real result;
// the relative error must stay below 2^-12 (plus one output LSB).  a = 0
// must give the largest output.  Combinational: results are read one
// clock after the input changes.
module tb_nr_recip;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  logic [35:0] a1;
  logic [37:0] a2;
  logic [31:0] y1, y2;

  nr_recip #(.IN_W(36), .IN_F(26), .OUT_W(32), .OUT_F(16), .RSQRT(1'b0)) u_rcp (.a(a1), .y(y1));
  nr_recip #(.IN_W(38), .IN_F(26), .OUT_W(32), .OUT_F(16), .RSQRT(1'b1)) u_rsq (.a(a2), .y(y2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string what, real got, real exp);
    checks++;
    if (got < exp * (1.0 - 1.0 / 4096.0) - 1.0 / 65536.0 ||
        got > exp * (1.0 + 1.0 / 4096.0) + 1.0 / 65536.0) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  initial begin
    a1 = '0; a2 = '0;
    @(posedge clk);
    checks++;
    if (y1 != 32'hffff_ffff || y2 != 32'hffff_ffff) begin
      failures++; $display("FAIL zero input gives %h %h", y1, y2);
    end
    for (int n = 0; n < 3000; n++) begin
      real x1, x2;
      int  sh;
      // |r|^2 from about 2^-10 to 2^7; n^2 from 2^-10 to 2^9
      sh = $urandom_range(16, 33);
      a1 = 36'({$urandom, $urandom}) & ((36'd1 << sh) - 1);
      a1[sh-1] = 1'b1;
      sh = $urandom_range(16, 35);
      a2 = 38'({$urandom, $urandom}) & ((38'd1 << sh) - 1);
      a2[sh-1] = 1'b1;
      @(posedge clk);
      x1 = real'(a1) / real'(1 << 26);
      x2 = real'(a2) / real'(1 << 26);
      cmp("recip", real'(y1) / 65536.0, 1.0 / x1);
      cmp("rsqrt", real'(y2) / 65536.0, 1.0 / $sqrt(x2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
