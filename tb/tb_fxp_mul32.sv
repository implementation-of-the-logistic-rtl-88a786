// tb_fxp_mul32: self-checking test of the pipelined 32x32 multiplier.
//
// Feeds one operand pair per clock (corner values, then random words, with
// gaps in i_valid) and checks that every product equals the exact longint
// product and appears exactly two cycles after its operands, with o_valid.
module tb_fxp_mul32;
  import lm_pkg::*;

  logic i_clk = 0, i_rst = 1, i_valid = 0;
  q16_16_t i_a = '0, i_b = '0;
  logic o_valid;
  q32_32_t o_p;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  fxp_mul32 dut (.*);

  always #5 i_clk = ~i_clk;
  always @(posedge i_clk) cyc <= cyc + 1;

  // expected product and valid, indexed by the cycle they must appear in
  longint exp_p[int unsigned];
  bit     exp_v[int unsigned];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NCORNER = 8;
  int corner[NCORNER] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h7FFF_FFFF,
                          32'h8000_0000, 32'h0001_0000, 32'h0000_FFFF, 32'hFFFF_0000};

  task automatic drive(int a, int b, bit v);
    @(negedge i_clk);
    i_a = a; i_b = b; i_valid = v;
    exp_v[cyc + 2] = v;
    exp_p[cyc + 2] = longint'(a) * longint'(b);
  endtask

  // compare on each falling edge, after the outputs have settled
  always @(negedge i_clk) begin
    if (!i_rst && exp_v.exists(cyc)) begin
      checks++;
      if (o_valid !== exp_v[cyc]) begin
        failures++;
        $display("FAIL cyc %0d: o_valid %0b expected %0b", cyc, o_valid, exp_v[cyc]);
      end
      if (exp_v[cyc]) begin
        checks++;
        if (o_p !== exp_p[cyc]) begin
          failures++;
          $display("FAIL cyc %0d: o_p %h expected %h", cyc, o_p, exp_p[cyc]);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge i_clk);
    @(negedge i_clk) i_rst = 0;
    foreach (corner[i]) foreach (corner[j]) drive(corner[i], corner[j], 1);
    for (int k = 0; k < 2000; k++) drive($urandom, $urandom, ($urandom % 4) != 0);
    repeat (5) drive(0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
