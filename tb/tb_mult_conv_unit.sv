// tb_mult_conv_unit: self-checking test of the multiplication and
// conversion unit.
//
// Streams Q16.16 operand pairs (random, plus pairs chosen to overflow and to
// underflow) in both rounding modes, one per cycle, and checks every result
// and flag against the reference, exactly three cycles after the operands.
module tb_mult_conv_unit;
  import lm_pkg::*;
  import tb_ref_pkg::*;

  logic i_clk = 0, i_rst = 1, i_valid = 0;
  q16_16_t i_a = '0, i_b = '0;
  round_mode_t i_round = RND_TRUNC;
  logic o_valid, o_over, o_under;
  q16_16_t o_q;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  mult_conv_unit dut (.*);

  always #5 i_clk = ~i_clk;
  always @(posedge i_clk) cyc <= cyc + 1;

  conv_res_t exp_r[int unsigned];
  bit        exp_v[int unsigned];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // i_round is held for the whole latency in this test, as the unit requires.
  task automatic drive(int a, int b, bit v);
    @(negedge i_clk);
    i_a = a; i_b = b; i_valid = v;
    exp_v[cyc + 3] = v;
    exp_r[cyc + 3] = mulconv_ref(a, b, i_round);
  endtask

  always @(negedge i_clk) begin
    if (!i_rst && exp_v.exists(cyc)) begin
      checks++;
      if (o_valid !== exp_v[cyc]) begin
        failures++;
        $display("FAIL cyc %0d: o_valid %0b expected %0b", cyc, o_valid, exp_v[cyc]);
      end
      if (exp_v[cyc]) begin
        checks++;
        if (o_q !== exp_r[cyc].q || o_over !== exp_r[cyc].over || o_under !== exp_r[cyc].under) begin
          failures++;
          $display("FAIL cyc %0d: q=%h over=%0b under=%0b expected q=%h over=%0b under=%0b", cyc,
                   o_q, o_over, o_under, exp_r[cyc].q, exp_r[cyc].over, exp_r[cyc].under);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge i_clk);
    @(negedge i_clk) i_rst = 0;
    for (int m = 0; m < 2; m++) begin
      @(negedge i_clk) i_round = round_mode_t'(m);
      drive(32'h0004_0000, 32'h0000_199A, 1);   // 4 * 0.1
      drive(32'h7FFF_0000, 32'h0002_0000, 1);   // overflow
      drive(32'h8000_0000, 32'h0002_0000, 1);   // negative overflow
      drive(32'h0000_0001, 32'h0000_8000, 1);   // underflow
      drive(32'hFFFF_FFFF, 32'h0000_8000, 1);   // negative underflow
      for (int k = 0; k < 1000; k++) begin
        int a, b;
        a = $urandom; b = $urandom;
        a = a >>> ($urandom % 32);
        b = b >>> ($urandom % 32);
        drive(a, b, ($urandom % 4) != 0);
      end
      repeat (4) drive(0, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
