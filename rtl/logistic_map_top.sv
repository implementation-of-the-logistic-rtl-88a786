// logistic_map_top: logistic map generator in 32-bit fixed point.
//
// Iterates x_{n+1} = r * x_n * (1 - x_n) in Q16.16 for IT_MAX iterations
// starting from x0, with truncation or rounding toward +infinity. A control
// unit (state machine and iteration counter) runs the operative unit
// (uoml) once per iteration; the X_n register path presets x0, catches each
// new result and feeds it back. This partition and the interconnect follow
// the design.
//
// Interface: i_start (level or pulse, sampled in idle) begins a run with the
// i_r, i_x0 and i_round present; these must be held during the run. o_xn is
// the current sample. o_done pulses for one cycle as each step's result is
// ready; o_xn holds that result from the following cycle, when o_counter
// (the number of completed iterations) has also advanced. o_over and
// o_under report overflow and underflow of the most recent step.
// o_done_all pulses for one cycle when the run is over, after which the unit
// is idle again. Timing: one iteration takes 10 clock cycles (the first op
// cycle, in which the operative unit starts, its 7-cycle latency, the cycle
// in which the control unit sees o_done, and one done_it cycle). With
// IT_MAX iterations, o_done_all is high in the cycle after the
// (10*IT_MAX + 1)-th rising edge following the edge that samples i_start.
// The assertions at the end are disabled while i_rst is high, so a linter
// may report i_rst as used both asynchronously and synchronously; the
// synchronous use is only in those simulation checks.
module logistic_map_top
  import lm_pkg::*;
#(
  parameter logic [CNT_W-1:0] IT_MAX = CNT_W'(150)
) (
  input  logic             i_clk,
  input  logic             i_rst,
  input  logic             i_start,
  input  q16_16_t          i_r,
  input  q16_16_t          i_x0,
  input  round_mode_t      i_round,
  output q16_16_t          o_xn,
  output logic             o_done,
  output logic             o_over,
  output logic             o_under,
  output logic             o_done_all,
  output logic [CNT_W-1:0] o_counter
);

  logic      ready, idle, op;
  q16_16_t   xn_reg, xn_new;
  cu_state_t state;

  control_unit #(.IT_MAX(IT_MAX)) u_ctrl (
    .i_clk      (i_clk),
    .i_rst      (i_rst),
    .i_start    (i_start),
    .i_done     (o_done),
    .o_ready    (ready),
    .o_idle     (idle),
    .o_op       (op),
    .o_done_all (o_done_all),
    .o_counter  (o_counter),
    .o_state    (state)
  );

  uoml u_uoml (
    .i_clk   (i_clk),
    .i_rst   (i_rst),
    .i_r     (i_r),
    .i_x     (xn_reg),
    .i_ready (ready),
    .i_round (i_round),
    .o_done  (o_done),
    .o_over  (o_over),
    .o_under (o_under),
    .o_xn    (xn_new)
  );

  xn_path u_xn (
    .i_clk    (i_clk),
    .i_rst    (i_rst),
    .i_x0     (i_x0),
    .i_xn_new (xn_new),
    .i_idle   (idle),
    .i_op     (op),
    .i_done   (o_done),
    .o_xn     (xn_reg)
  );

  assign o_xn = xn_reg;

  // Every step's result arrives while the control unit is in op, so none
  // is lost.
  a_done_in_op: assert property (@(posedge i_clk) disable iff (i_rst) o_done |-> state == ST_OP);

endmodule
