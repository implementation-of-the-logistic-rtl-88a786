// xn_path: routing multiplexers MUX1, MUX2 and the X_n register.
//
// The X_n register holds the current sample of the sequence, drives the
// output and feeds it back as x_{n-1} to the operative unit. It is loaded on
// every clock edge from MUX2. MUX1 chooses the initial condition x0 while the
// control unit is idle and the register's own value otherwise; MUX2 chooses
// the operative unit's new result when it signals done while the control
// unit is in op, and MUX1's output otherwise. So the register is preset to
// x0 in idle, takes each new result at the end of an iteration and holds its
// value in between. The two multiplexers, the register and their select
// signals (idle state; op state together with done) follow the design; the
// reset value of zero is this design's choice.
//
// Interface: i_x0, i_xn_new (new result), i_idle, i_op, i_done in; o_xn out.
// Timing: o_xn changes only on a rising edge of i_clk; i_rst is
// asynchronous, active high.
module xn_path
  import lm_pkg::*;
(
  input  logic    i_clk,
  input  logic    i_rst,
  input  q16_16_t i_x0,
  input  q16_16_t i_xn_new,
  input  logic    i_idle,
  input  logic    i_op,
  input  logic    i_done,
  output q16_16_t o_xn
);

  q16_16_t mux1, mux2, xn_q;

  always_comb begin
    mux1 = i_idle ? i_x0 : xn_q;                 // MUX1
    mux2 = (i_done && i_op) ? i_xn_new : mux1;   // MUX2
  end

  always_ff @(posedge i_clk or posedge i_rst) begin
    if (i_rst) xn_q <= '0;
    else       xn_q <= mux2;
  end

  assign o_xn = xn_q;

endmodule
