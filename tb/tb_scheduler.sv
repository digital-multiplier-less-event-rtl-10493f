// tb_scheduler: walks the scheduler through run -> initialisation -> ready
// -> behaviour -> (dig) replay -> ready, and a second trial that ends by
// timeout (T_TRIAL shortened to 50 cycles), checking the state, the
// one-cycle control pulses, E_learning, the MUX select, neuron Active
// (including the one-cycle reset on an action and on a replay window
// start), the timeout after exactly T_TRIAL behaviour cycles, the return to
// idle when run drops, and the free-running time stamp.
`timescale 1ns/1ps
module tb_scheduler;
  import snn_pkg::*;
  localparam int TT = 50;
  logic clk = 0, rst_n = 0, run = 0, start_trial = 0, init_done = 0, dig = 0, move = 0;
  logic seq_start = 0, replay_done = 0;
  sched_state_e state;
  logic init_start, hist_clr, beh_start, beh_en, replay_start, e_learning, mux_sel;
  logic neuron_active, trial_done, timeout, timed_out;
  logic [15:0] now;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  scheduler #(.T_TRIAL(TT)) dut (.clk, .rst_n, .run, .start_trial, .init_done, .dig, .move,
    .seq_start, .replay_done, .state, .init_start, .hist_clr, .beh_start, .beh_en, .replay_start,
    .e_learning, .mux_sel, .neuron_active, .trial_done, .timeout, .timed_out, .now);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) state=%0d", what, $time, state); end
  endtask

  initial begin
    logic [15:0] n0;
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == S_IDLE && !neuron_active, "idle after reset");
    n0 = now;
    repeat (5) @(negedge clk);
    check(now == n0 + 5, "time stamp counts cycles");
    run = 1;
    @(negedge clk);
    check(state == S_INIT && init_start, "run -> INIT with init_start");
    init_done = 1;          // stale done must be ignored while init_start is high
    @(negedge clk);
    check(state == S_INIT, "done ignored in the init_start cycle");
    @(negedge clk);
    check(state == S_READY, "init_done -> READY");
    check(!neuron_active && !e_learning, "neurons rest when ready");
    start_trial = 1;
    @(negedge clk); start_trial = 0;
    check(state == S_BEHAVIOR && beh_start && hist_clr && !beh_en && !neuron_active, "trial start pulses");
    @(negedge clk);
    check(beh_en && neuron_active && !mux_sel && !e_learning, "behaviour phase");
    move = 1; #1;
    check(!neuron_active, "neurons reset on an action");
    @(negedge clk); move = 0;
    check(state == S_BEHAVIOR, "move stays in behaviour");
    dig = 1;
    @(negedge clk); dig = 0;
    check(state == S_REPLAY && replay_start && e_learning && mux_sel, "dig -> REPLAY with E_learning");
    check(!neuron_active, "neurons reset at replay start");
    @(negedge clk);
    check(neuron_active, "neurons active in replay");
    seq_start = 1; #1;
    check(!neuron_active, "neurons reset at window start");
    @(negedge clk); seq_start = 0;
    repeat (3) @(negedge clk);
    replay_done = 1;
    @(negedge clk); replay_done = 0;
    check(state == S_READY && trial_done && !e_learning, "replay_done -> READY, trial_done");
    check(!timed_out, "no timeout flag");
    // second trial: timeout
    start_trial = 1;
    @(negedge clk); start_trial = 0;
    cyc = 0;
    while (!timeout && cyc < 200) begin @(negedge clk); cyc++; end
    check(timeout && cyc == TT, "timeout after T_TRIAL behaviour cycles");
    check(state == S_REPLAY && timed_out && replay_start, "timeout starts replay, flag set");
    replay_done = 1;
    @(negedge clk); replay_done = 0;
    run = 0;
    @(negedge clk);
    @(negedge clk);
    check(state == S_IDLE, "run low -> IDLE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
