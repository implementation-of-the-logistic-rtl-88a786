// tb_uoml: self-checking test of the logistic map operative unit.
//
// Runs single steps the way the control unit does (i_ready high until
// o_done, then low for a cycle) and checks the new x, o_over and o_under
// against the reference step and that o_done arrives exactly 7 cycles after
// the start edge, as a single-cycle pulse. Covers both rounding modes, a
// chained orbit for r = 4, x0 = 0.1, random operands, overflow in r*x and
// in 1 - x, underflow, and a step abandoned by dropping i_ready.
module tb_uoml;
  import lm_pkg::*;
  import tb_ref_pkg::*;

  localparam int LATENCY = 7;

  logic i_clk = 0, i_rst = 1, i_ready = 0;
  q16_16_t i_r = '0, i_x = '0;
  round_mode_t i_round = RND_TRUNC;
  logic o_done, o_over, o_under;
  q16_16_t o_xn;
  int checks = 0, failures = 0;
  int n_over = 0, n_under = 0;

  uoml dut (.*);

  always #5 i_clk = ~i_clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One step: raise ready, count edges until done, compare.
  task automatic step(int r, int x, bit rnd, output int xn);
    conv_res_t e;
    int lat;
    @(negedge i_clk);
    i_r = r; i_x = x; i_round = round_mode_t'(rnd); i_ready = 1;
    lat = 0;
    do begin
      @(negedge i_clk);
      lat++;
    end while (!o_done && lat < 50);
    e = step_ref(r, x, rnd);
    checks++;
    if (lat != LATENCY + 1) begin   // one edge starts the step, LATENCY more bring o_done
      failures++;
      $display("FAIL latency %0d, expected %0d", lat - 1, LATENCY);
    end
    checks++;
    if (o_xn !== e.q || o_over !== e.over || o_under !== e.under) begin
      failures++;
      $display("FAIL r=%h x=%h rnd=%0b: xn=%h over=%0b under=%0b expected %h %0b %0b",
               r, x, rnd, o_xn, o_over, o_under, e.q, e.over, e.under);
    end
    n_over  += int'(o_over);
    n_under += int'(o_under);
    xn = o_xn;
    // done must be a single pulse, and no new step may start while ready stays high
    @(negedge i_clk);
    checks++;
    if (o_done) begin
      failures++;
      $display("FAIL o_done longer than one cycle");
    end
    i_ready = 0;
  endtask

  initial begin
    int x, xn;
    repeat (3) @(posedge i_clk);
    @(negedge i_clk) i_rst = 0;

    for (int m = 0; m < 2; m++) begin
      x = 32'h0000_199A;                  // 0.1
      for (int n = 0; n < 40; n++) begin
        step(32'h0004_0000, x, 1'(m), xn);
        x = xn;
      end
    end
    step(32'h7FFF_0000, 32'h0002_0000, 1, xn);   // r*x overflows
    step(32'h0001_0000, 32'h8000_0000, 0, xn);   // 1 - x overflows
    step(32'h0000_0001, 32'h0000_8000, 1, xn);   // r*x underflows
    for (int k = 0; k < 300; k++) begin
      int r, xr;
      r = $urandom; xr = $urandom;
      step(r >>> ($urandom % 32), xr >>> ($urandom % 32), 1'($urandom % 2), xn);
    end
    checks++;
    if (n_over == 0 || n_under == 0) begin
      failures++;
      $display("FAIL coverage over=%0d under=%0d", n_over, n_under);
    end

    // Abandoned step: ready drops after 3 cycles, no done may follow.
    @(negedge i_clk);
    i_r = 32'h0004_0000; i_x = 32'h0000_4000; i_ready = 1;
    repeat (3) @(negedge i_clk);
    i_ready = 0;
    begin
      automatic bit seen = 0;
      repeat (12) begin
        @(negedge i_clk);
        if (o_done) seen = 1;
      end
      checks++;
      if (seen) begin
        failures++;
        $display("FAIL o_done after an abandoned step");
      end
    end
    // and the unit still works afterwards
    step(32'h0004_0000, 32'h0000_4000, 0, xn);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
