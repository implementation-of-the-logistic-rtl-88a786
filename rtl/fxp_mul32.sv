// fxp_mul32: pipelined 32 x 32 -> 64 bit signed multiplier.
//
// Each 32-bit operand is split into two equal 16-bit parts, a signed upper
// part and an unsigned lower part, a = aH*2^16 + aL. The four partial
// products aH*bH, aH*bL, aL*bH and aL*bL are formed in parallel in the first
// pipeline stage and summed with the proper shifts in the second:
//   p = (aH*bH << 32) + ((aH*bL + aL*bH) << 16) + aL*bL.
// Splitting into 16-bit parts and computing the parts in parallel in a
// pipeline follows the design; it lets each part map onto the FPGA's small
// embedded multipliers and shortens the critical path. The two-stage depth
// and the valid signal that travels with the data are this design's choices.
//
// Interface: i_a, i_b are Q16.16 words sampled with i_valid; o_p is their
//   exact Q32.32 product. Timing: o_p/o_valid appear LATENCY = 2 clock
//   cycles after i_a/i_b/i_valid; a new pair may enter every cycle.
//   i_rst is an asynchronous, active-high reset that clears the valid bits.
module fxp_mul32
  import lm_pkg::*;
(
  input  logic    i_clk,
  input  logic    i_rst,
  input  logic    i_valid,
  input  q16_16_t i_a,
  input  q16_16_t i_b,
  output logic    o_valid,
  output q32_32_t o_p
);

  // Operand parts: upper halves signed, lower halves zero-extended to 17 bits
  // so that every partial product is a signed multiplication.
  logic signed [HALF_W-1:0] a_hi, b_hi;
  logic signed [HALF_W:0]   a_lo, b_lo;

  always_comb begin
    a_hi = i_a[WORD_W-1:HALF_W];
    b_hi = i_b[WORD_W-1:HALF_W];
    a_lo = {1'b0, i_a[HALF_W-1:0]};
    b_lo = {1'b0, i_b[HALF_W-1:0]};
  end

  // Stage 1: the four partial products, in parallel.
  logic signed [2*HALF_W-1:0] pp_hh_q;   // aH*bH, 32 bits
  logic signed [2*HALF_W:0]   pp_hl_q;   // aH*bL, 33 bits
  logic signed [2*HALF_W:0]   pp_lh_q;   // aL*bH, 33 bits
  logic        [2*HALF_W-1:0] pp_ll_q;  // aL*bL, 32 bits, unsigned
  logic                       v1_q;

  always_ff @(posedge i_clk or posedge i_rst) begin
    if (i_rst) begin
      pp_hh_q <= '0;
      pp_hl_q <= '0;
      pp_lh_q <= '0;
      pp_ll_q <= '0;
      v1_q    <= 1'b0;
    end else begin
      pp_hh_q <= a_hi * b_hi;
      pp_hl_q <= a_hi * b_lo;
      pp_lh_q <= a_lo * b_hi;
      pp_ll_q <= 32'(a_lo * b_lo);
      v1_q    <= i_valid;
    end
  end

  // Stage 2: weighted sum of the partial products.
  q32_32_t sum;
  always_comb begin
    sum = (q32_32_t'(pp_hh_q) <<< 2*HALF_W)
        + (q32_32_t'(pp_hl_q) <<< HALF_W)
        + (q32_32_t'(pp_lh_q) <<< HALF_W)
        + q32_32_t'({32'd0, pp_ll_q});
  end

  always_ff @(posedge i_clk or posedge i_rst) begin
    if (i_rst) begin
      o_p     <= '0;
      o_valid <= 1'b0;
    end else begin
      o_p     <= sum;
      o_valid <= v1_q;
    end
  end

endmodule
