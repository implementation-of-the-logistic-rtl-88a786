// tb_xn_path: self-checking test of MUX1, MUX2 and the X_n register.
//
// Drives random selects and data on every cycle and checks the register
// against its expected next value: x0 while idle, the new result when done
// arrives in op, and the held value otherwise. Each case must occur.
module tb_xn_path;
  import lm_pkg::*;

  logic i_clk = 0, i_rst = 1;
  q16_16_t i_x0 = '0, i_xn_new = '0, o_xn;
  logic i_idle = 0, i_op = 0, i_done = 0;
  int checks = 0, failures = 0;
  int n_x0 = 0, n_new = 0, n_hold = 0;
  int expv;

  xn_path dut (.*);

  always #5 i_clk = ~i_clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge i_clk);
    checks++;
    if (o_xn !== '0) begin failures++; $display("FAIL reset value %h", o_xn); end
    i_rst = 0;
    expv = 0;
    for (int k = 0; k < 3000; k++) begin
      // the control unit is never in idle and op at once
      case ($urandom % 4)
        0: begin i_idle = 1; i_op = 0; end
        1, 2: begin i_idle = 0; i_op = 1; end
        default: begin i_idle = 0; i_op = 0; end
      endcase
      i_done = 1'($urandom % 2);
      i_x0 = $urandom;
      i_xn_new = $urandom;
      if (i_op && i_done) begin expv = i_xn_new; n_new++; end
      else if (i_idle)    begin expv = i_x0;     n_x0++;  end
      else                begin n_hold++; end
      @(negedge i_clk);
      checks++;
      if (o_xn !== expv) begin
        failures++;
        $display("FAIL k=%0d idle=%0b op=%0b done=%0b: xn=%h expected %h",
                 k, i_idle, i_op, i_done, o_xn, expv);
      end
    end
    checks++;
    if (n_x0 == 0 || n_new == 0 || n_hold == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
