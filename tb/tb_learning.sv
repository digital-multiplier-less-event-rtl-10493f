// tb_learning: the context-dependent learning experiment, run as a workload.
//
// The whole network (snn_top at its default sizes) plays N_TRIALS trials of
// the task. Each trial starts from a random one of the eight stimulus
// triplets (one of the places A1, B1, A2, B2 and one of the items X, Y); the
// environment rewards a dig on item X in context A or item Y in context B.
// The testbench records, per trial, whether the dig was rewarded and how
// many cycles the trial took, and prints the performance as the percentage
// of rewarded digs over a sliding window of 30 trials (every 10 trials),
// together with the mean processing time (cycles from trial start to the
// dig) and the number of moves in the same window. These are the
// measurements the experiment is judged by. They are reported, not checked:
// the checks are that every trial ends with a dig or a timeout and a replay,
// that every plastic weight stays in [0, 1) and that the inhibitory weights
// are not changed by learning. A second seed is not run; change lfsr_seed to
// start from other initial weights.
`timescale 1ns/1ps
module tb_learning;
  import snn_pkg::*;

  localparam int N_TRIALS = 300;
  localparam int WIN      = 30;
  localparam int N        = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b0, start_trial = 1'b0, reward;
  logic [5:0] triplet = '0;
  logic ready, dig, move, e_learning, trial_done, timeout;
  logic [5:0] cur_triplet;
  logic [N-1:0] spikes;

  int checks = 0, failures = 0;
  bit correct [N_TRIALS];
  int cycles  [N_TRIALS];
  int moves   [N_TRIALS];

  always #5 clk = ~clk;

  snn_top dut (
    .clk, .rst_n, .run, .start_trial, .reward, .triplet,
    .lfsr_seed(32'h5EED_1234), .lfsr_taps(32'h8020_0003), .w_inh(32'sh8000_0000),
    .ready, .dig, .move, .cur_triplet, .spikes, .e_learning, .trial_done, .timeout
  );

  assign reward = rewarded(cur_triplet);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic check_weights();
    bit ok = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (is_exc(i, j, 6, 8) && dut.w[i][j] < 0) ok = 0;
        if (is_inh(i, j, 6, 8) && dut.w[i][j] != 32'sh8000_0000) ok = 0;
      end
    check(ok, "weights in range after trial");
  endtask

  initial begin : main
    int t, cyc, sum, csum, msum, n_dig, n_to;
    bit got_dig, got_to;
    n_dig = 0; n_to = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run = 1'b1;
    wait (ready);
    for (t = 0; t < N_TRIALS; t++) begin
      triplet = 6'((1 << ($urandom % 4)) | (1 << (4 + $urandom % 2)));
      @(negedge clk); start_trial = 1'b1;
      @(negedge clk); start_trial = 1'b0;
      got_dig = 0; got_to = 0; cyc = 0; correct[t] = 0; cycles[t] = 0; moves[t] = 0;
      while (!trial_done && cyc < 30000 + 2 * 130 + 20) begin
        @(posedge clk); cyc++;
        if (dig) begin
          got_dig = 1; n_dig++; correct[t] = reward;
          cycles[t] = cyc;
        end
        if (move) moves[t]++;
        if (timeout) begin n_to++; got_to = 1; cycles[t] = cyc; end
      end
      check(trial_done, "trial ends with a replay");
      check(got_dig != got_to, "trial ends with dig or timeout");
      check_weights();
      if (t + 1 >= WIN && (t + 1) % 10 == 0) begin
        sum = 0; csum = 0; msum = 0;
        for (int k = t + 1 - WIN; k <= t; k++) begin
          sum += int'(correct[k]);
          csum += cycles[k];
          msum += moves[k];
        end
        $display("trial %4d: performance %3d%% (last %0d trials), mean time to dig %0d cycles, moves %0d",
                 t + 1, sum * 100 / WIN, WIN, csum / WIN, msum);
      end
      @(posedge clk);
    end
    $display("digs=%0d timeouts=%0d", n_dig, n_to);
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
