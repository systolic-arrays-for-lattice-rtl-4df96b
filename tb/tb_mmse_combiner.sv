// tb_mmse_combiner -- self-checking testbench of mmse_combiner.
// Per row, a random number (0..2) of valid words arrives at random clocks
// while en is high, plus words while en is low (which must be ignored); the
// accumulated sum and word count are compared with a model kept here.
// Latency: the sum of the words is visible one clock after the last word.
module tb_mmse_combiner;
  import lr_pkg::*;
  localparam int M = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic clr, en;
  dm_t  in [M];
  d_t   v  [M];
  logic [1:0] cnt [M];

  mmse_combiner #(.M(M)) dut (.clk, .rst_n, .clr, .en, .in, .v, .cnt);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sre [M], sim [M];
  int     n   [M];

  initial begin
    clr = 1'b0; en = 1'b0;
    for (int i = 0; i < M; i++) in[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 300; trial++) begin
      // clear
      @(negedge clk); clr = 1'b1;
      @(negedge clk); clr = 1'b0;
      for (int i = 0; i < M; i++) begin sre[i] = 0; sim[i] = 0; n[i] = 0; end
      for (int c = 0; c < 6; c++) begin
        en = (c < 4);
        for (int i = 0; i < M; i++) begin
          in[i] = '0;
          if ($urandom_range(0, 2) == 0) begin
            in[i].v    = 1'b1;
            in[i].sel2 = 1'(c & 1);
            in[i].d.re = D_W'(int'($urandom_range(0, 1 << 20)) - (1 << 19));
            in[i].d.im = D_W'(int'($urandom_range(0, 1 << 20)) - (1 << 19));
            if (en && n[i] < 3) begin
              sre[i] += longint'(in[i].d.re);
              sim[i] += longint'(in[i].d.im);
              n[i]++;
            end else if (en) in[i].v = 1'b0;
          end
        end
        @(negedge clk);
      end
      en = 1'b0;
      for (int i = 0; i < M; i++) in[i] = '0;
      @(negedge clk);
      for (int i = 0; i < M; i++) begin
        checks++;
        if (longint'(v[i].re) != sre[i] || longint'(v[i].im) != sim[i] || int'(cnt[i]) != n[i]) begin
          failures++;
          $display("FAIL row %0d got (%0d,%0d) cnt %0d exp (%0d,%0d) cnt %0d",
                   i, v[i].re, v[i].im, cnt[i], sre[i], sim[i], n[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
