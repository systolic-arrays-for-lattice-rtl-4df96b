// tb_lr_controller -- self-checking testbench of lr_controller.
// The array is replaced by a small model of its control behaviour: after a
// "#" (fsr_go) it stays busy for a random number of clocks and presents the
// next swap-flag vector from a random script; after a switch pulse it stays
// rot_busy for a random time.  The testbench follows the two algorithms on
// its own and checks, for FSR-LLL (algo 0) and ASLR (algo 1), that
//   * exactly the expected row pairs are rotated and then exchanged
//     (FSR-LLL: the smallest k' >= k; ASLR: all flagged pairs of the current
//     order, else of the other order, orders alternating),
//   * no switch closes while the size reduction runs, no exchange happens
//     while a rotation runs, no "#" is sent while either runs,
//   * the run ends when no pair is flagged, or at MAX_ITER with hit_limit,
//   * the counters n_iter, n_swap, n_pairs and cycles are right.
module tb_lr_controller;
  localparam int M = 4;
  localparam int MAX_ITER = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   n_lim = 0, n_par = 0, n_other = 0;

  logic start, algo, fsr_go, fsr_busy, rot_busy, busy, done, hit_limit;
  logic [M-2:0] swap, sw, cswap;
  logic [15:0]  n_iter, n_swap, n_pairs, cycles;

  lr_controller #(.M(M), .MAX_ITER(MAX_ITER)) dut (
    .clk, .rst_n, .start, .algo, .fsr_go, .fsr_busy, .swap, .sw, .cswap, .rot_busy,
    .busy, .done, .hit_limit, .n_iter, .n_swap, .n_pairs, .cycles);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- model of the array's control side --------------------------------------
  logic [M-2:0] script [$];
  logic [M-2:0] sw_log [$], cs_log [$];
  int fcnt = 0, rcnt = 0, busy_clk = 0;
  int proto_err = 0;
  assign fsr_busy = fsr_go || fcnt != 0;
  assign rot_busy = rcnt != 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (busy) busy_clk++;
      if (fsr_go && (fcnt != 0 || rcnt != 0)) proto_err++;
      if (sw != '0 && (fcnt != 0 || rcnt != 0)) proto_err++;
      if (cswap != '0 && (fcnt != 0 || rcnt != 0)) proto_err++;
      if (fsr_go) begin
        fcnt <= $urandom_range(2, 12);
        swap <= (script.size() != 0) ? script.pop_front() : '0;
      end else if (fcnt != 0) fcnt <= fcnt - 1;
      if (sw != '0) begin
        rcnt <= $urandom_range(1, 6);
        sw_log.push_back(sw);
      end else if (rcnt != 0) rcnt <= rcnt - 1;
      if (cswap != '0) cs_log.push_back(cswap);
    end
  end

  function automatic int popc(logic [M-2:0] v);
    int n = 0;
    for (int b = 0; b < M - 1; b++) n += int'(v[b]);
    return n;
  endfunction

  task automatic run(logic a, int len, bit endless);
    logic [M-2:0] flags [$], exp_sw [$];
    logic [M-2:0] even_m, odd_m, f, p;
    int k, iters, pairs, lim;
    logic order_odd;
    for (int b = 0; b < M - 1; b++) begin even_m[b] = (b % 2 == 0); odd_m[b] = (b % 2 == 1); end
    // script of flag vectors, then all clear (unless endless)
    script.delete(); sw_log.delete(); cs_log.delete();
    for (int n = 0; n < (endless ? MAX_ITER + 5 : len); n++) begin
      f = (M-1)'($urandom);
      if (f == '0 || endless) f[0] = 1'b1;
      flags.push_back(f);
      script.push_back(f);
    end
    // expected sequence
    k = 2; order_odd = 0; iters = 0; pairs = 0; lim = 0;
    forever begin
      f = (iters < flags.size()) ? flags[iters] : '0;
      iters++;
      p = '0;
      if (!a) begin
        for (int b = M - 2; b >= 0; b--) if (f[b] && b + 2 >= k) p = '0 | ((M-1)'(1) << b);
        for (int b = 0; b < M - 1; b++) if (p[b]) k = (b + 1 > 2) ? b + 1 : 2;
      end else begin
        if (!order_odd) p = ((f & even_m) != '0) ? (f & even_m) : (f & odd_m);
        else            p = ((f & odd_m) != '0) ? (f & odd_m) : (f & even_m);
        if (p != '0) begin
          if (popc(p) > 1) n_par++;
          if ((p & (order_odd ? even_m : odd_m)) != '0) begin
            if ((p & (order_odd ? odd_m : even_m)) == '0) n_other++;
          end
          order_odd = ((p & odd_m) == '0);   // next order: the other parity
        end
      end
      if (p == '0) break;
      if (iters >= MAX_ITER) begin lim = 1; break; end
      exp_sw.push_back(p);
      pairs += popc(p);
    end
    // run the controller
    @(negedge clk); algo = a; start = 1;
    @(negedge clk); start = 0;
    busy_clk = 0;
    while (!done) @(negedge clk);
    expect1("swap sequence", sw_log.size() == exp_sw.size() && cs_log.size() == exp_sw.size());
    for (int n = 0; n < exp_sw.size() && n < sw_log.size() && n < cs_log.size(); n++)
      expect1("pairs rotated and exchanged", sw_log[n] == exp_sw[n] && cs_log[n] == exp_sw[n]);
    expect1("iteration limit flag", hit_limit == 1'(lim));
    if (lim != 0) n_lim++;
    expect1("counters", int'(n_iter) == iters && int'(n_swap) == exp_sw.size() && int'(n_pairs) == pairs);
    expect1("cycle counter", int'(cycles) == busy_clk);
    expect1("handshake order", proto_err == 0);
  endtask

  initial begin
    start = 0; algo = 0; swap = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) run(1'(n % 2), $urandom_range(0, 10), 0);
    run(0, 0, 1);
    run(1, 0, 1);
    expect1("limit and parallel swaps exercised", n_lim == 2 && n_par > 0 && n_other > 0);
    $display("parallel ASLR steps %0d, other-order steps %0d", n_par, n_other);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
