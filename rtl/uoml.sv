// uoml: logistic map operative unit.
//
// Computes one step of the logistic map, x_n = r * x_{n-1} * (1 - x_{n-1}),
// in Q16.16. The product r*x_{n-1} (first multiplication and conversion
// unit) and the difference 1 - x_{n-1} are formed in parallel; a second
// multiplication and conversion unit then multiplies the two. Both units
// narrow their products with the rounding mode given by i_round
// (1 = toward +infinity, 0 = truncation). This structure, the port names
// and the overflow/underflow/done outputs follow the design.
//
// This design's own choices: the operands and rounding mode are captured
// when the unit starts; the unit sequences itself with a phase counter that
// knows the fixed three-cycle latency of each unit; 1 - x saturates (and
// raises o_over) if it does not fit in Q16.16; o_over and o_under are the OR
// of the flags raised during the step and are held with o_xn until the next
// step ends.
//
// Handshake: a step starts on a rising clock edge at which i_ready is 1 and
// the unit is neither busy nor showing o_done. o_done is a one-cycle pulse,
// LATENCY = 7 cycles after that edge, in the same cycle as the new o_xn,
// o_over and o_under. i_ready is a level: if it falls while a step is under
// way, the step is abandoned and no o_done follows. i_rst is asynchronous,
// active high.
// The assertions at the end are disabled while i_rst is high, so a linter
// may report i_rst as used both asynchronously and synchronously; the
// synchronous use is only in those simulation checks.
module uoml
  import lm_pkg::*;
(
  input  logic        i_clk,
  input  logic        i_rst,
  input  q16_16_t     i_r,
  input  q16_16_t     i_x,        // x_{n-1}
  input  logic        i_ready,
  input  round_mode_t i_round,
  output logic        o_done,
  output logic        o_over,
  output logic        o_under,
  output q16_16_t     o_xn
);

  localparam int unsigned MCU_LAT = 3;          // latency of mult_conv_unit
  localparam int unsigned PH_W    = 3;
  localparam logic [PH_W-1:0] PH_MCU2 = PH_W'(MCU_LAT);      // MCU1 result ready
  localparam logic [PH_W-1:0] PH_LAST = PH_W'(2 * MCU_LAT);  // MCU2 result ready

  q16_16_t     r_q, x_q, omx_q;
  round_mode_t rnd_q;
  logic        busy_q;
  logic [PH_W-1:0] phase_q;
  logic        omx_over_q, f1_over_q, f1_under_q;
  logic        start;

  assign start = i_ready && !busy_q && !o_done;

  // 1 - x in parallel with r*x, saturated to the Q16.16 range.
  logic signed [WORD_W:0] omx_wide;
  q16_16_t omx;
  logic    omx_over;
  always_comb begin
    omx_wide = (WORD_W+1)'(Q_ONE) - (WORD_W+1)'(x_q);
    omx_over = omx_wide > (WORD_W+1)'(Q_MAX);
    omx      = omx_over ? Q_MAX : q16_16_t'(omx_wide);
  end

  // First unit: r * x_{n-1}.
  logic    m1_valid, m1_over, m1_under;
  q16_16_t rx;
  mult_conv_unit u_mcu_rx (
    .i_clk   (i_clk),
    .i_rst   (i_rst),
    .i_valid (busy_q && phase_q == '0),
    .i_a     (r_q),
    .i_b     (x_q),
    .i_round (rnd_q),
    .o_valid (m1_valid),
    .o_q     (rx),
    .o_over  (m1_over),
    .o_under (m1_under)
  );

  // Second unit: (r * x_{n-1}) * (1 - x_{n-1}).
  logic    m2_valid, m2_over, m2_under;
  q16_16_t xn;
  mult_conv_unit u_mcu_out (
    .i_clk   (i_clk),
    .i_rst   (i_rst),
    .i_valid (busy_q && phase_q == PH_MCU2),
    .i_a     (rx),
    .i_b     (omx_q),
    .i_round (rnd_q),
    .o_valid (m2_valid),
    .o_q     (xn),
    .o_over  (m2_over),
    .o_under (m2_under)
  );

  always_ff @(posedge i_clk or posedge i_rst) begin
    if (i_rst) begin
      r_q        <= '0;
      x_q        <= '0;
      omx_q      <= '0;
      rnd_q      <= RND_TRUNC;
      busy_q     <= 1'b0;
      phase_q    <= '0;
      omx_over_q <= 1'b0;
      f1_over_q  <= 1'b0;
      f1_under_q <= 1'b0;
      o_done     <= 1'b0;
      o_over     <= 1'b0;
      o_under    <= 1'b0;
      o_xn       <= '0;
    end else begin
      o_done <= 1'b0;
      if (!i_ready) begin
        busy_q <= 1'b0;                 // abandon a step under way
      end else if (start) begin
        r_q     <= i_r;
        x_q     <= i_x;
        rnd_q   <= i_round;
        busy_q  <= 1'b1;
        phase_q <= '0;
      end else if (busy_q) begin
        phase_q <= phase_q + 1'b1;
        if (phase_q == '0) begin
          omx_q      <= omx;
          omx_over_q <= omx_over;
        end
        if (phase_q == PH_MCU2) begin
          f1_over_q  <= m1_over;
          f1_under_q <= m1_under;
        end
        if (phase_q == PH_LAST) begin
          busy_q  <= 1'b0;
          o_done  <= 1'b1;
          o_xn    <= xn;
          o_over  <= omx_over_q | f1_over_q | m2_over;
          o_under <= f1_under_q | m2_under;
        end
      end
    end
  end

  // The phase counter must agree with the units' own valid flags.
  a_mcu1_aligned: assert property (@(posedge i_clk) disable iff (i_rst)
    (busy_q && phase_q == PH_MCU2) |-> m1_valid);
  a_mcu2_aligned: assert property (@(posedge i_clk) disable iff (i_rst)
    (busy_q && phase_q == PH_LAST) |-> m2_valid);

endmodule
