// tb_replay_mode: replays two stored samples, first rewarded, then not.
// Every cycle the expected input voltages are computed here from the window
// position (three phases of 43 cycles in a 130-cycle window, forward layer
// order 0-1-2 with the oldest sample first, reverse 2-1-0 with the newest
// first) and compared with the unit's output. A spike of a driven neuron
// must end its drive for the rest of the window. Also checks seq_start at
// every window start, the total length (2 x 130 cycles), and the immediate
// done for an empty history.
`timescale 1ns/1ps
module tb_replay_mode;
  import snn_pkg::*;
  localparam int N = 16, T = 130, PH = 43;
  logic clk = 0, rst_n = 0, start = 0, reward = 0;
  logic [N-1:0] hist [2];
  logic [1:0] count = 2;
  logic [N-1:0] spikes = '0;
  fx_t vin [N];
  logic seq_start, busy, fwd, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  replay_mode dut (.clk, .rst_n, .start, .reward, .hist, .count, .spikes, .vin, .seq_start, .busy, .fwd, .done);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  function automatic int lay(int i);
    return (i <= 5) ? 0 : (i <= 13) ? 1 : 2;
  endfunction

  task automatic run_replay(bit rew);
    int cyc, bad;
    logic [N-1:0] fired;
    @(negedge clk); start = 1; reward = rew;
    @(negedge clk); start = 0; reward = 0;
    cyc = 0; bad = 0;
    for (int s = 0; s < 2; s++) begin
      logic [N-1:0] cur;
      cur = rew ? hist[1] : hist[0];
      if (s == 1) cur = rew ? hist[0] : hist[1];
      fired = '0;
      for (int t = 0; t < T; t++) begin
        int ph, drv;
        #1;
        if (t == 0) check(seq_start, "seq_start at window start");
        ph = (t < PH) ? 0 : (t < 2 * PH) ? 1 : 2;
        drv = rew ? ph : 2 - ph;
        for (int i = 0; i < N; i++) begin
          fx_t e;
          e = '0;
          if (t != 0 && cur[i] && !fired[i] && lay(i) == drv)
            e = (drv == 0) ? V_INPUT_DEF : (drv == 1) ? V_HIDDEN_DEF : V_OUTPUT_DEF;
          if (vin[i] != e) bad++;
        end
        // make the first driven neuron of the hidden layer spike once at t = 60
        spikes = '0;
        if (t == 60) for (int i = 6; i < 14; i++) if (cur[i]) begin spikes[i] = 1; fired[i] = 1; break; end
        @(negedge clk);
        cyc++;
      end
    end
    spikes = '0;
    #1;
    check(bad == 0, "input voltages follow order, phase and first spike");
    check(done && !busy, "done after 2 x T_replay cycles");
    check(cyc == 2 * T, "replay length");
  endtask

  initial begin
    hist[0] = 16'h4411;   // newest: A1, X, hidden 10, dig
    hist[1] = 16'h8221;   // oldest: A1, Y, hidden 9, move
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_replay(1);
    check(fwd, "rewarded replay is forward");
    run_replay(0);
    check(!fwd, "unrewarded replay is reverse");
    count = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(done && !busy, "empty history: done at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
