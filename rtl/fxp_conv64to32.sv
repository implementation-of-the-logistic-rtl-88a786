// fxp_conv64to32: narrows a Q32.32 product to a Q16.16 word.
//
// The 16 low fraction bits are discarded. In truncation mode the result is
// the arithmetic shift p >>> 16 (the floor of the exact value); in
// round-toward-+infinity mode one LSB is added when any discarded bit is set
// (the ceiling). The rounded value, 48 bits wide, is then checked against the
// Q16.16 range: if it does not fit, o_over is raised and the result saturates
// to the largest or smallest word of the same sign. If the product is
// non-zero but its magnitude is below one LSB (2^-16), o_under is raised and
// the result is zero. Saturation on overflow, zero on underflow and the two
// rounding modes follow the design; the exact underflow test (any non-zero
// product whose value lies strictly between -2^-16 and 2^-16) and the
// floor-style truncation of negative numbers are this design's choices.
//
// Interface: purely combinational; i_p is the product, i_round selects the
// rounding mode (1 = toward +infinity, 0 = truncation), o_q the narrowed word,
// o_over and o_under the flags. No clock, no latency.
module fxp_conv64to32
  import lm_pkg::*;
(
  input  q32_32_t     i_p,
  input  round_mode_t i_round,
  output q16_16_t     o_q,
  output logic        o_over,
  output logic        o_under
);

  localparam int unsigned RW = PROD_W - FRAC_W + 1;  // 49: room for the +1

  logic signed [RW-1:0] shifted;   // floor(p / 2^16), sign-extended by one
  logic signed [RW-1:0] rounded;
  logic                 sticky;    // any discarded bit set
  logic                 tiny;      // non-zero, |p| < 2^-16

  always_comb begin
    shifted = RW'(i_p >>> FRAC_W);
    sticky  = |i_p[FRAC_W-1:0];
    rounded = shifted + ((i_round == RND_PINF && sticky) ? RW'(1) : RW'(0));
    tiny    = (i_p != '0) && (i_p > -q32_32_t'(1 << FRAC_W))
                          && (i_p <  q32_32_t'(1 << FRAC_W));

    o_over  = 1'b0;
    o_under = 1'b0;
    if (rounded > RW'(Q_MAX)) begin
      o_over = 1'b1;
      o_q    = Q_MAX;
    end else if (rounded < RW'(Q_MIN)) begin
      o_over = 1'b1;
      o_q    = Q_MIN;
    end else if (tiny) begin
      o_under = 1'b1;
      o_q     = '0;
    end else begin
      o_q     = q16_16_t'(rounded);
    end
  end

endmodule
