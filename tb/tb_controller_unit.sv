// tb_controller_unit: the controller with the neurons replaced by spikes
// from the testbench. Checks initialisation (64 weight writes, one
// inh_load), the behaviour-phase drive through the multiplexer, that a move
// spike switches the stimulus, that a dig starts the replay with E_learning
// and the reward routed to the replay unit (forward), the replay drive
// through the multiplexer, ts_clr at replay start and at each window, and trial_done after
// 2 x 130 replay cycles. A second trial without reward replays in reverse.
`timescale 1ns/1ps
module tb_controller_unit;
  import snn_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, run = 0, start_trial = 0, reward = 0;
  logic [5:0] triplet = 6'b010001;
  logic [N-1:0] spikes = '0, active;
  fx_t vin [N];
  logic e_learning, ts_clr, inh_load, dig, move, trial_done, timeout, replay_fwd;
  logic [15:0] now;
  logic wr_en [4];
  logic [5:0] wr_idx [4];
  fx_t wr_data [4];
  logic [5:0] cur_triplet;
  sched_state_e state;
  int checks = 0, failures = 0, n_wr = 0, n_inh = 0, n_clr = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    for (int l = 0; l < 4; l++) n_wr += wr_en[l];
    n_inh += inh_load;
    n_clr += ts_clr;
  end

  controller_unit dut (.clk, .rst_n, .run, .start_trial, .reward, .triplet,
    .lfsr_seed(32'h1234_5678), .lfsr_taps(32'h8020_0003), .spikes, .vin, .active, .e_learning,
    .ts_clr, .now, .wr_en, .wr_idx, .wr_data, .inh_load, .dig, .move, .cur_triplet,
    .trial_done, .timeout, .replay_fwd, .state);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) state=%0d", what, $time, state); end
  endtask

  task automatic trial(bit rew);
    int cyc;
    n_clr = 0;
    @(negedge clk); start_trial = 1;
    @(negedge clk); start_trial = 0;
    @(negedge clk);
    check(vin[0] == V_INPUT_DEF && vin[4] == V_INPUT_DEF && vin[1] == 0 && active == '1, "behaviour drive via MUX");
    // stimulus neurons, hidden 8, move
    @(negedge clk); spikes = 16'h0011;
    @(negedge clk); spikes = 16'h0100;
    @(negedge clk); spikes = 16'h8000;
    @(negedge clk); spikes = '0;
    check(move && cur_triplet == 6'b100100, "move switches stimulus");
    @(negedge clk);
    check(vin[2] == V_INPUT_DEF && vin[5] == V_INPUT_DEF && vin[0] == 0, "drive of the new stimulus");
    @(negedge clk); spikes = 16'h0024;
    @(negedge clk); spikes = 16'h0200;
    @(negedge clk); spikes = 16'h4000;
    @(negedge clk); spikes = '0; reward = rew;
    check(dig, "dig pulse");
    @(negedge clk);
    check(state == S_REPLAY && e_learning, "replay with E_learning");
    @(negedge clk);
    check(replay_fwd == rew, "replay direction follows reward");
    repeat (5) @(negedge clk);
    // forward: oldest sample (A1, X, hidden 8, move) first, sensory phase
    if (rew) check(vin[0] == V_INPUT_DEF && vin[4] == V_INPUT_DEF && vin[8] == 0, "replay drive via MUX (forward)");
    else     check(vin[14] == V_OUTPUT_DEF && vin[0] == 0, "replay drive via MUX (reverse, newest first)");
    cyc = 7;
    while (!trial_done && cyc < 400) begin @(negedge clk); cyc++; end
    check(trial_done, "trial_done");
    check(cyc >= 2 * 130 && cyc <= 2 * 130 + 4, "replay of two samples takes 2 x 130 cycles");
    check(n_clr == 3, "ts_clr at replay start and once per window");
    reward = 0;
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run = 1;
    cyc = 0;
    while (state != S_READY && cyc < 100) begin @(negedge clk); cyc++; end
    check(state == S_READY, "ready after init");
    check(n_wr == 64 && n_inh == 1, "64 weight writes and one inh_load");
    trial(1);
    trial(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
