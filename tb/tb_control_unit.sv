// tb_control_unit: self-checking test of the state machine and counter.
//
// A small model of the operative unit answers each cycle of o_ready with an
// i_done pulse after a chosen delay. The test compares the state, counter,
// o_ready, o_idle, o_op and o_done_all on every cycle with a cycle-by-cycle
// expectation built from the flowchart, for IT_MAX = 5, for runs with
// different done delays, for a start held high across the end of a run, and
// checks that idle waits for i_start. A second instance with IT_MAX = 0
// must end a run without any iteration.
module tb_control_unit;
  import lm_pkg::*;

  localparam logic [CNT_W-1:0] ITM = 5;

  logic i_clk = 0, i_rst = 1, i_start = 0, i_done = 0;
  logic o_ready, o_idle, o_op, o_done_all;
  logic [CNT_W-1:0] o_counter;
  cu_state_t o_state;
  int checks = 0, failures = 0;
  int n_done_all = 0, n_done_it = 0;

  control_unit #(.IT_MAX(ITM)) dut (.*);

  // A second unit with IT_MAX = 0: a run must end without any iteration.
  logic z_start = 0, z_ready, z_idle, z_op, z_done_all;
  logic [CNT_W-1:0] z_counter;
  cu_state_t z_state;
  control_unit #(.IT_MAX(0)) dut0 (
    .i_clk(i_clk), .i_rst(i_rst), .i_start(z_start), .i_done(1'b1),
    .o_ready(z_ready), .o_idle(z_idle), .o_op(z_op), .o_done_all(z_done_all),
    .o_counter(z_counter), .o_state(z_state));

  always #5 i_clk = ~i_clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected registers of the flowchart
  cu_state_t e_st;
  int        e_cnt;

  task automatic expect_now();
    checks++;
    if (o_state !== e_st || o_counter !== CNT_W'(e_cnt) || o_ready !== (e_st == ST_OP)
        || o_idle !== (e_st == ST_IDLE) || o_op !== (e_st == ST_OP)
        || o_done_all !== (e_st == ST_DONE_ALL)) begin
      failures++;
      $display("FAIL %0t: state=%s cnt=%0d ready=%0b done_all=%0b, expected %s cnt=%0d",
               $time, o_state.name(), o_counter, o_ready, o_done_all, e_st.name(), e_cnt);
    end
  endtask

  // advance one clock, updating the expectation from the inputs as sampled
  task automatic tick();
    cu_state_t n_st;
    n_st = e_st;
    case (e_st)
      ST_IDLE:     begin e_cnt = 0; if (i_start) n_st = ST_OP; end
      ST_OP:       if (e_cnt == int'(ITM)) n_st = ST_DONE_ALL;
                   else if (i_done) begin e_cnt++; n_st = ST_DONE_IT; end
      ST_DONE_IT:  n_st = ST_OP;
      ST_DONE_ALL: n_st = ST_IDLE;
    endcase
    if (e_st == ST_OP && n_st == ST_DONE_IT) n_done_it++;
    if (n_st == ST_DONE_ALL) n_done_all++;
    e_st = n_st;
    @(negedge i_clk);
    expect_now();
  endtask

  // one run; the model raises i_done `delay` cycles into each op phase
  task automatic run(int delay, bit hold_start);
    int op_cycles;
    i_start = 1;
    tick();
    if (!hold_start) i_start = 0;
    op_cycles = 0;
    while (e_st != ST_IDLE) begin
      if (e_st == ST_OP) op_cycles++; else op_cycles = 0;
      i_done = (e_st == ST_OP) && (op_cycles == delay);
      tick();
    end
    i_done = 0;
    i_start = 0;
  endtask

  initial begin
    e_st = ST_IDLE; e_cnt = 0;
    repeat (2) @(negedge i_clk);
    i_rst = 0;
    expect_now();
    repeat (4) tick();          // idle waits for start
    run(7, 0);
    run(1, 0);
    run(3, 1);
    repeat (3) tick();
    // IT_MAX = 0: idle -> op -> done_all -> idle, counter stays 0
    z_start = 1;
    @(negedge i_clk);
    z_start = 0;
    begin
      automatic cu_state_t seq[3] = '{ST_OP, ST_DONE_ALL, ST_IDLE};
      foreach (seq[i]) begin
        checks++;
        if (z_state !== seq[i] || z_counter !== '0 || z_done_all !== (seq[i] == ST_DONE_ALL)) begin
          failures++;
          $display("FAIL IT_MAX=0 step %0d: state=%s counter=%0d", i, z_state.name(), z_counter);
        end
        @(negedge i_clk);
      end
    end
    checks++;
    if (n_done_all != 3 || n_done_it != 3 * ITM) begin
      failures++;
      $display("FAIL done_all=%0d done_it=%0d", n_done_all, n_done_it);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
