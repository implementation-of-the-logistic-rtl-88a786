// control_unit: finite state machine and iteration counter.
//
// Four states, idle, op, done_it and done_all, and an 11-bit counter (0 to
// 2047) that counts completed iterations of the logistic map. In idle the
// unit waits for i_start = 1, clearing the counter as it leaves. In op it
// holds o_ready = 1 so that the operative unit works; when the counter has
// reached IT_MAX it goes to done_all, otherwise each o_done pulse of the
// operative unit (input i_done) increments the counter and moves it to
// done_it, which only separates two iterations (o_ready = 0 for one cycle)
// before returning to op. done_all signals the end of the run and returns
// to idle. States, transitions, the counter and its width follow the
// design's flowchart; the state encoding, the decoded state outputs and
// making every output a function of the state alone (Moore) are this
// design's choices. The end-of-run pulse o_done_all lasts one full clock
// cycle here, where the original describes a half-cycle pulse.
//
// Interface: i_start, i_done in; o_ready, o_idle, o_op (the state decodes
// that steer MUX1 and MUX2), o_done_all, o_counter and o_state out.
// Timing: every transition happens on a rising edge of i_clk; i_rst is
// asynchronous, active high, and enters idle with the counter at zero.
// The assertions at the end are disabled while i_rst is high, so a linter
// may report i_rst as used both asynchronously and synchronously; the
// synchronous use is only in those simulation checks.
module control_unit
  import lm_pkg::*;
#(
  parameter logic [CNT_W-1:0] IT_MAX = CNT_W'(150)   // iterations per run
) (
  input  logic             i_clk,
  input  logic             i_rst,
  input  logic             i_start,
  input  logic             i_done,
  output logic             o_ready,
  output logic             o_idle,
  output logic             o_op,
  output logic             o_done_all,
  output logic [CNT_W-1:0] o_counter,
  output cu_state_t        o_state
);

  cu_state_t        state_q, state_d;
  logic [CNT_W-1:0] cnt_q, cnt_d;

  always_comb begin
    state_d = state_q;
    cnt_d   = cnt_q;
    unique case (state_q)
      ST_IDLE: begin
        cnt_d = '0;
        if (i_start) state_d = ST_OP;
      end
      ST_OP: begin
        if (cnt_q == IT_MAX) begin
          state_d = ST_DONE_ALL;
        end else if (i_done) begin
          cnt_d   = cnt_q + 1'b1;
          state_d = ST_DONE_IT;
        end
      end
      ST_DONE_IT:  state_d = ST_OP;
      ST_DONE_ALL: state_d = ST_IDLE;
      default:     state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge i_clk or posedge i_rst) begin
    if (i_rst) begin
      state_q <= ST_IDLE;
      cnt_q   <= '0;
    end else begin
      state_q <= state_d;
      cnt_q   <= cnt_d;
    end
  end

  always_comb begin
    o_idle     = (state_q == ST_IDLE);
    o_op       = (state_q == ST_OP);
    o_ready    = (state_q == ST_OP);
    o_done_all = (state_q == ST_DONE_ALL);
    o_counter  = cnt_q;
    o_state    = state_q;
  end

  // The counter never runs past IT_MAX.
  a_cnt_bound: assert property (@(posedge i_clk) disable iff (i_rst)
    cnt_q <= IT_MAX);

endmodule
