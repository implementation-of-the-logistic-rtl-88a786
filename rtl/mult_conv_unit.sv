// mult_conv_unit: multiplication and conversion unit (MCU).
//
// A pipelined fxp_mul32 in series with an fxp_conv64to32, so that the
// product of two Q16.16 words comes out again as one Q16.16 word, together
// with overflow and underflow flags. This series arrangement follows the
// design; the output register after the converter is this design's choice.
//
// Interface: i_a, i_b with i_valid in; o_q, o_over, o_under with o_valid out.
//   i_round selects truncation (0) or rounding toward +infinity (1) and is
//   sampled when the product reaches the converter, so it must be held for
//   the duration of the operation. Timing: LATENCY = 3 cycles (two in the
//   multiplier, one in the output register), one new operand pair per cycle.
module mult_conv_unit
  import lm_pkg::*;
(
  input  logic        i_clk,
  input  logic        i_rst,
  input  logic        i_valid,
  input  q16_16_t     i_a,
  input  q16_16_t     i_b,
  input  round_mode_t i_round,
  output logic        o_valid,
  output q16_16_t     o_q,
  output logic        o_over,
  output logic        o_under
);

  logic    p_valid;
  q32_32_t p;
  q16_16_t q;
  logic    over, under;

  fxp_mul32 u_mul (
    .i_clk   (i_clk),
    .i_rst   (i_rst),
    .i_valid (i_valid),
    .i_a     (i_a),
    .i_b     (i_b),
    .o_valid (p_valid),
    .o_p     (p)
  );

  fxp_conv64to32 u_conv (
    .i_p     (p),
    .i_round (i_round),
    .o_q     (q),
    .o_over  (over),
    .o_under (under)
  );

  always_ff @(posedge i_clk or posedge i_rst) begin
    if (i_rst) begin
      o_valid <= 1'b0;
      o_q     <= '0;
      o_over  <= 1'b0;
      o_under <= 1'b0;
    end else begin
      o_valid <= p_valid;
      o_q     <= q;
      o_over  <= over;
      o_under <= under;
    end
  end

endmodule
