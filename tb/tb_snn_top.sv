// tb_snn_top: end-to-end test of the whole network at its default sizes.
//
// An environment model plays the experiment: after `run` and weight
// initialisation it starts trials from random stimulus triplets, answers
// every dig with the reward of the current triplet (item X in context A or
// item Y in context B is rewarded) and lets the replay run. It checks, per
// trial, that the trial ends within T_trial plus the replay windows, that each
// move switches to the complementary triplet, that the replay direction
// matches the reward, that every plastic weight stays in [0, 1) and that the
// inhibitory weights keep their loaded value. It counts how often each
// mechanism happened (initialisation, move, dig, forward and reverse replay,
// LTP, LTD, neuron firing, inhibition pushing a neuron back to rest, trial
// timeout) and fails for any of these that never occurred, except the
// timeout, which is reported. It also prints the fraction of correct
// choices per block of trials, the learning curve of the experiment.
`timescale 1ns/1ps
module tb_snn_top;
  import snn_pkg::*;

  localparam int N_TRIALS = 60;
  localparam int N        = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b0, start_trial = 1'b0, reward;
  logic [5:0] triplet = '0;
  logic ready, dig, move, e_learning, trial_done, timeout;
  logic [5:0] cur_triplet;
  logic [N-1:0] spikes;

  int checks = 0, failures = 0;
  int n_init = 0, n_move = 0, n_dig = 0, n_fwd = 0, n_rev = 0, n_ltp = 0, n_ltd = 0;
  int n_fire = 0, n_inhib = 0, n_timeout = 0, n_correct = 0, blk_correct = 0;

  always #5 clk = ~clk;

  snn_top dut (
    .clk, .rst_n, .run, .start_trial, .reward, .triplet,
    .lfsr_seed(32'hACE1_2345), .lfsr_taps(32'h8020_0003), .w_inh(32'sh8000_0000),
    .ready, .dig, .move, .cur_triplet, .spikes, .e_learning, .trial_done, .timeout
  );

  // environment: reward follows the current stimulus
  assign reward = rewarded(cur_triplet);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // event counters
  logic [5:0] trip_before;
  neuron_state_e prev_state [N];
  logic [N-1:0] prev_active = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.u_init.inh_load) n_init++;
    n_ltp += $countones(dut.ltp);
    n_ltd += $countones(dut.ltd);
    n_fire += $countones(spikes);
    for (int j = 0; j < N; j++) begin
      // Integrating -> Resting while active: V_m was pushed below V_reset
      if (prev_state[j] == N_INTEGRATING && dut.nstate[j] == N_RESTING && prev_active[j]) n_inhib++;
      prev_state[j]  <= dut.nstate[j];
      prev_active[j] <= dut.active[j];
    end
    if (timeout) n_timeout++;
    if (dut.u_ctrl.replay_start) begin
      if (dut.u_ctrl.u_rep.reward) n_fwd++; else n_rev++;
    end
  end

  // move switches to the complementary triplet
  always @(posedge clk) if (rst_n) begin
    trip_before <= cur_triplet;
    if (move) check(cur_triplet == complement(trip_before), "move gives complementary triplet");
  end

  task automatic check_weights();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (is_exc(i, j, 6, 8))
          check(dut.w[i][j] >= 0, "plastic weight in range");
        else if (is_inh(i, j, 6, 8))
          check(dut.w[i][j] == 32'sh8000_0000, "inhibitory weight static");
        else
          check(dut.w[i][j] == 0, "no synapse reads zero");
      end
  endtask

  initial begin : main
    int t, cyc, start_cyc;
    bit got_dig, fwd_seen, rew_at_dig;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run = 1'b1;
    cyc = 0;
    while (!ready && cyc < 200) begin @(posedge clk); cyc++; end
    check(ready, "initialisation reaches READY");
    check(cyc <= 30, "initialisation takes at most 30 cycles");
    check_weights();
    for (t = 0; t < N_TRIALS; t++) begin
      // random valid triplet: one place of 4, one item of 2
      triplet = 6'((1 << ($urandom % 4)) | (1 << (4 + $urandom % 2)));
      @(negedge clk); start_trial = 1'b1;
      @(negedge clk); start_trial = 1'b0;
      got_dig = 0; cyc = 0; rew_at_dig = 0;
      while (!trial_done && cyc < 30000 + 2 * 130 + 20) begin
        @(posedge clk); cyc++;
        if (dig) begin
          got_dig = 1; rew_at_dig = reward; n_dig++;
          if (reward) begin n_correct++; blk_correct++; end
        end
        if (move) n_move++;
        if (dut.u_ctrl.replay_start) fwd_seen = dut.u_ctrl.u_rep.reward;
        if (dut.u_ctrl.u_rep.busy)
          check(dut.u_ctrl.replay_fwd == (got_dig && rew_at_dig), "replay direction follows reward");
      end
      check(trial_done, "trial completes within T_trial + replay");
      check_weights();
      if (t % 20 == 19) begin
        $display("trials %0d-%0d: %0d/20 rewarded digs", t - 19, t, blk_correct);
        blk_correct = 0;
      end
      @(posedge clk);
    end
    $display("events: init=%0d move=%0d dig=%0d fwd_replay=%0d rev_replay=%0d ltp=%0d ltd=%0d fire=%0d inhib_rest=%0d timeout=%0d correct=%0d/%0d",
             n_init, n_move, n_dig, n_fwd, n_rev, n_ltp, n_ltd, n_fire, n_inhib, n_timeout, n_correct, N_TRIALS);
    check(n_init == 1, "initialisation happened once");
    check(n_move > 0, "move happened");
    check(n_dig > 0, "dig happened");
    check(n_fwd > 0, "forward replay happened");
    check(n_rev > 0, "reverse replay happened");
    check(n_ltp > 0, "LTP happened");
    check(n_ltd > 0, "LTD happened");
    check(n_fire > 0, "neurons fired");
    check(n_inhib > 0, "inhibition reset a neuron");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (N_TRIALS * 31000 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
