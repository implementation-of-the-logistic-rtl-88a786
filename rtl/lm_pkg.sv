// lm_pkg: types and constants shared by the logistic-map generator.
//
// Every datapath word is a 32-bit signed two's-complement fixed-point
// number with 16 integer bits and 16 fraction bits (Q16.16), as the
// design prescribes. A full product of two such words is a Q32.32 value
// of 64 bits, which the conversion unit narrows back to Q16.16.
// The two rounding modes (truncate, round toward +infinity) and the four
// states of the control unit are enumerated here so that every module uses
// the same encoding. The state encoding itself is this design's choice.
package lm_pkg;

  localparam int unsigned WORD_W = 32;  // width of a Q16.16 word
  localparam int unsigned FRAC_W = 16;  // fraction bits
  localparam int unsigned PROD_W = 64;  // width of a full Q32.32 product
  localparam int unsigned HALF_W = 16;  // width of one part of a split word
  localparam int unsigned CNT_W  = 11;  // iteration counter, 0 .. 2047

  typedef logic signed [WORD_W-1:0] q16_16_t;
  typedef logic signed [PROD_W-1:0] q32_32_t;

  localparam q16_16_t Q_ONE     = q16_16_t'(32'sh0001_0000);  // 1.0
  localparam q16_16_t Q_MAX     = q16_16_t'(32'sh7FFF_FFFF);  // largest Q16.16
  localparam q16_16_t Q_MIN     = q16_16_t'(32'sh8000_0000);  // smallest Q16.16

  // Rounding mode applied when a product is narrowed (input i_round).
  typedef enum logic {
    RND_TRUNC = 1'b0,  // drop the discarded bits (round toward -infinity)
    RND_PINF  = 1'b1   // round toward +infinity
  } round_mode_t;

  // States of the control unit's finite state machine.
  typedef enum logic [1:0] {
    ST_IDLE     = 2'd0,
    ST_OP       = 2'd1,
    ST_DONE_IT  = 2'd2,
    ST_DONE_ALL = 2'd3
  } cu_state_t;

endpackage
