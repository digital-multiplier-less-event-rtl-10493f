// tb_neurons_core: checks the neuron row with its winner-take-all margin.
// A 30 mV input pulse makes a neuron cross the threshold two cycles later.
// Two sensory neurons crossing together both fire (no WTA in that layer);
// of two hidden neurons crossing in the same cycle only the one with the
// higher V_m fires, and likewise for the two motor neurons; an exact tie
// fires both. Non-driven neurons never fire, and a synaptic input routed to
// one neuron's row reaches only that neuron.
`timescale 1ns/1ps
module tb_neurons_core;
  import snn_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] active = '0;
  fx_t syn_in [N][N];
  fx_t vin [N];
  logic [N-1:0] spikes;
  fx_t vmem [N];
  neuron_state_e states [N];
  int checks = 0, failures = 0;
  localparam fx_t V30 = 32'sd64424509;   // 30 mV
  localparam fx_t V31 = 32'sd66571993;   // 31 mV

  always #5 clk = ~clk;

  neurons_core dut (.clk, .rst_n, .active, .syn_in, .vin, .spikes, .vmem, .states);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) spikes=%b", what, $time, spikes); end
  endtask

  task automatic zero();
    for (int j = 0; j < N; j++) begin
      vin[j] = '0;
      for (int i = 0; i < N; i++) syn_in[j][i] = '0;
    end
  endtask

  // one-cycle pulses, then the spike vector two cycles later
  task automatic pulse_and_check(int a, fx_t va, int b, fx_t vb, logic [N-1:0] exp_spk, string what);
    zero();
    @(negedge clk); vin[a] = va; vin[b] = vb;
    @(negedge clk); zero();
    check(spikes == '0, {what, ": no spike one cycle after"});
    @(negedge clk);
    check(spikes == exp_spk, what);
    repeat (4) @(negedge clk);   // let the neurons settle
  endtask

  initial begin
    zero();
    repeat (2) @(negedge clk);
    rst_n = 1;
    active = '1;
    repeat (2) @(negedge clk);
    pulse_and_check(0, V30, 1, V30, 16'h0003, "sensory neurons both fire");
    pulse_and_check(6, V30, 7, V31, 16'h0080, "hidden WTA: higher V_m wins");
    pulse_and_check(14, V31, 15, V30, 16'h4000, "motor WTA: higher V_m wins");
    pulse_and_check(8, V30, 9, V30, 16'h0300, "exact tie fires both");
    // synaptic input: +1.0 >>> 8 = 3.9 mV per weight, 8 weights -> 31 mV
    zero();
    @(negedge clk);
    for (int i = 0; i < 8; i++) syn_in[10][i] = 32'sh7FFF_FFFF;
    @(negedge clk); zero();
    @(negedge clk);
    check(spikes == 16'h0400, "synaptic row reaches only its neuron");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
