// tb_logistic_map_top: end-to-end test of the logistic map generator at its
// default size (IT_MAX = 150 iterations per run).
//
// Runs the evaluated case, r = 4 and x0 = 0.1, once with rounding toward
// +infinity and once with truncation. Every sample the generator produces
// is compared with the reference step, the counter must advance by one per
// iteration, each iteration must take exactly 10 clock cycles, and
// o_done_all must pulse once per run after exactly IT_MAX iterations,
// 10*IT_MAX + 1 clock edges after the edge that samples i_start. For
// these two series the test also
//   - checks the first samples against the exact real-valued map,
//   - checks that the two series start nearly equal and then part (the
//     rounding mode alone makes them differ),
//   - computes the Lyapunov exponent (1/N) * sum ln|r (1 - 2 x_n)| over
//     N = 150 samples and checks it is within 0.1 of ln 2.
// Two further runs force overflow (r near the top of the range, x0 = 2) and
// underflow (r = 2^-16). Start, iteration, end of run, both rounding modes,
// overflow and underflow are counted; one that never occurs is a failure.
// The series are printed as x_n in decimal.
module tb_logistic_map_top;
  import lm_pkg::*;
  import tb_ref_pkg::*;

  localparam int ITERS      = 150;   // default IT_MAX of the top
  localparam int ITER_CYCLES = 10;

  logic i_clk = 0, i_rst = 1, i_start = 0;
  q16_16_t i_r = '0, i_x0 = '0;
  round_mode_t i_round = RND_TRUNC;
  q16_16_t o_xn;
  logic o_done, o_over, o_under, o_done_all;
  logic [CNT_W-1:0] o_counter;
  int checks = 0, failures = 0;
  int n_start = 0, n_iter = 0, n_done_all = 0, n_over = 0, n_under = 0;
  int n_runs_round = 0, n_runs_trunc = 0;

  logistic_map_top dut (.*);

  always #5 i_clk = ~i_clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // One run of the generator; returns the series x_0 .. x_ITERS.
  task automatic run(int r, int x0, bit rnd, bit show, output int xs[]);
    int x, cyc, last_done, k;
    bit done_all_seen;
    conv_res_t e;
    xs = new[ITERS + 1];
    xs[0] = x0;
    x = x0;
    @(negedge i_clk);
    i_r = r; i_x0 = x0; i_round = round_mode_t'(rnd); i_start = 1;
    n_start++;
    if (rnd) n_runs_round++; else n_runs_trunc++;
    @(negedge i_clk);
    i_start = 0;
    checks++;
    if (o_xn !== x0) fail($sformatf("x0 not loaded: %h", o_xn));
    k = 0; cyc = 0; last_done = 0; done_all_seen = 0;
    while (!done_all_seen && cyc < ITER_CYCLES * (ITERS + 5)) begin
      @(negedge i_clk);
      cyc++;
      if (o_done) begin
        e = step_ref(r, x, rnd);
        if (k > 0) begin
          checks++;
          if (cyc - last_done != ITER_CYCLES)
            fail($sformatf("iteration %0d took %0d cycles", k, cyc - last_done));
        end
        last_done = cyc;
        checks++;
        if (o_over !== e.over || o_under !== e.under)
          fail($sformatf("flags at n=%0d: over=%0b under=%0b", k + 1, o_over, o_under));
        n_over  += int'(o_over);
        n_under += int'(o_under);
        // the register takes the value on the next edge
        @(negedge i_clk);
        cyc++;
        k++;
        n_iter++;
        checks++;
        if (o_xn !== e.q)
          fail($sformatf("x_%0d = %h, expected %h", k, o_xn, e.q));
        checks++;
        if (o_counter !== CNT_W'(k))
          fail($sformatf("counter %0d after %0d iterations", o_counter, k));
        x = o_xn;
        if (k <= ITERS) xs[k] = x;
        if (show) $display("rnd=%0b n=%0d x=%0.6f", rnd, k, real'(x) / 65536.0);
      end
      if (o_done_all) begin
        done_all_seen = 1;
        checks++;
        if (cyc != ITER_CYCLES * ITERS + 1)
          fail($sformatf("done_all %0d cycles after start, expected %0d", cyc, ITER_CYCLES * ITERS + 1));
        n_done_all++;
      end
    end
    checks++;
    if (!done_all_seen || k != ITERS)
      fail($sformatf("run ended after %0d iterations, done_all=%0b", k, done_all_seen));
    @(negedge i_clk);
    checks++;
    if (o_done_all !== 1'b0) fail("o_done_all longer than one cycle");
  endtask

  function automatic real lyapunov(int xs[], real r);
    real s = 0.0;
    for (int n = 0; n < ITERS; n++)
      s += $ln(fabs(r * (1.0 - 2.0 * real'(xs[n]) / 65536.0)));
    return s / ITERS;
  endfunction

  initial begin
    int xr[], xt[], dummy[];
    real lam_r, lam_t, xe;
    int first_diff;
    repeat (3) @(negedge i_clk);
    i_rst = 0;
    repeat (3) @(negedge i_clk);

    run(32'h0004_0000, 32'h0000_199A, 1, 1, xr);   // r = 4, x0 = 0.1, round to +inf
    run(32'h0004_0000, 32'h0000_199A, 0, 1, xt);   // same, truncation

    // the first samples follow the exact map closely
    xe = real'(32'h199A) / 65536.0;
    for (int n = 1; n <= 5; n++) begin
      xe = 4.0 * xe * (1.0 - xe);
      checks++;
      if (fabs(real'(xr[n]) / 65536.0 - xe) > 1e-3 || fabs(real'(xt[n]) / 65536.0 - xe) > 1e-3)
        fail($sformatf("x_%0d far from the exact map %f", n, xe));
    end
    // the series agree closely at first (they differ only in the last bits)
    // and then part visibly (by more than 0.1)
    first_diff = -1;
    for (int n = 0; n <= ITERS; n++)
      if (first_diff < 0 && fabs(real'(xr[n] - xt[n]) / 65536.0) > 0.1) first_diff = n;
    checks++;
    if (first_diff < 5 || first_diff > 50) fail($sformatf("series part at n=%0d", first_diff));
    $display("series first differ by more than 0.1 at n=%0d", first_diff);

    lam_r = lyapunov(xr, 4.0);
    lam_t = lyapunov(xt, 4.0);
    $display("Lyapunov exponent: rounding %0.4f, truncation %0.4f (ln 2 = %0.4f)",
             lam_r, lam_t, $ln(2.0));
    checks++;
    if (fabs(lam_r - $ln(2.0)) > 0.1 || fabs(lam_t - $ln(2.0)) > 0.1)
      fail("Lyapunov exponent not close to ln 2");

    run(32'h7FFF_0000, 32'h0002_0000, 1, 0, dummy);   // overflow
    run(32'h0000_0001, 32'h0000_8000, 0, 0, dummy);   // underflow

    checks++;
    if (n_start != 4 || n_done_all != 4 || n_iter != 4 * ITERS || n_over == 0 || n_under == 0
        || n_runs_round == 0 || n_runs_trunc == 0)
      fail("a mechanism did not occur");
    $display("starts=%0d iterations=%0d done_all=%0d overflow=%0d underflow=%0d round_runs=%0d trunc_runs=%0d",
             n_start, n_iter, n_done_all, n_over, n_under, n_runs_round, n_runs_trunc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
