// tb_fxp_conv64to32: self-checking test of the Q32.32 -> Q16.16 converter.
//
// Applies directed products (exact values, values just past an LSB, the
// edges of the Q16.16 range, tiny positive and negative products) and random
// products of several magnitudes in both rounding modes, and compares the
// word and both flags with the reference converter. At least one overflow,
// one underflow and one rounding-up case must occur.
module tb_fxp_conv64to32;
  import lm_pkg::*;
  import tb_ref_pkg::*;

  q32_32_t     i_p;
  round_mode_t i_round;
  q16_16_t     o_q;
  logic        o_over, o_under;
  int checks = 0, failures = 0;
  int n_over = 0, n_under = 0, n_up = 0;

  fxp_conv64to32 dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint p, bit rnd);
    conv_res_t e;
    i_p = p;
    i_round = round_mode_t'(rnd);
    #1;
    e = conv_ref(p, rnd);
    checks++;
    if (o_q !== e.q || o_over !== e.over || o_under !== e.under) begin
      failures++;
      $display("FAIL p=%h rnd=%0b: q=%h over=%0b under=%0b, expected q=%h over=%0b under=%0b",
               p, rnd, o_q, o_over, o_under, e.q, e.over, e.under);
    end
    n_over  += int'(e.over);
    n_under += int'(e.under);
    if (rnd && !e.over && !e.under && (p % 65536) != 0) n_up++;
  endtask

  longint dir[] = '{0, 1, -1, 65535, 65536, 65537, -65535, -65536, -65537,
                    64'h0000_0001_0000_0000, 64'h0000_0001_0000_0001,
                    64'h0000_7FFF_FFFF_0000, 64'h0000_7FFF_FFFF_0001,
                    64'h0000_7FFF_FFFF_FFFF, 64'h0000_8000_0000_0000,
                    64'hFFFF_8000_0000_0000, 64'hFFFF_7FFF_FFFF_FFFF,
                    64'hFFFF_8000_0000_0001, 64'h7FFF_FFFF_FFFF_FFFF,
                    64'h8000_0000_0000_0000, 64'h0000_0000_1999_9999};

  initial begin
    foreach (dir[i]) begin
      check(dir[i], 0);
      check(dir[i], 1);
    end
    for (int k = 0; k < 4000; k++) begin
      longint p;
      p = {$urandom, $urandom};
      p = p >>> ($urandom % 64);        // spread over all magnitudes
      check(p, 1'($urandom % 2));
    end
    checks++;
    if (n_over == 0 || n_under == 0 || n_up == 0) begin
      failures++;
      $display("FAIL coverage: over=%0d under=%0d round-up=%0d", n_over, n_under, n_up);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
