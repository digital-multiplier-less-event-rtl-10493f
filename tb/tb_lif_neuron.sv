// tb_lif_neuron: directed test of the LIF neuron state machine.
// Checks reset to Resting at V_reset, Resting->Waiting on Active, the exact
// linear leak per waiting cycle, integration of the barrel-shifted synaptic
// sum plus the direct input, firing two cycles after a supra-threshold input
// with a one-cycle spike and reset to V_reset, inhibition below V_reset
// sending the neuron to Resting, losing the winner-take-all arbitration
// (fire_en = 0), the pending input taken while Integrating, and Waiting ->
// Resting when Active drops. Expected values are computed in the testbench
// from the neuron equations.
`timescale 1ns/1ps
module tb_lif_neuron;
  import snn_pkg::*;
  localparam int NF = 4;
  localparam int SH = 8;
  logic clk = 0, rst_n = 0, active = 0, fire_en = 1;
  fx_t syn_in [NF];
  fx_t vin = '0;
  logic spike, cand;
  fx_t vmem, vm_cand;
  neuron_state_e state;
  int checks = 0, failures = 0;
  longint exp_v;

  always #5 clk = ~clk;

  lif_neuron #(.N_FANIN(NF), .W_SHIFT(SH)) dut (
    .clk, .rst_n, .active, .syn_in, .vin, .fire_en, .cand, .vm_cand, .spike, .vmem, .state);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) state=%0d vmem=%0d", what, $time, state, vmem); end
  endtask

  task automatic clr_in();
    for (int i = 0; i < NF; i++) syn_in[i] = '0;
    vin = '0;
  endtask

  initial begin
    clr_in();
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == N_RESTING && vmem == V_RESET_DEF && !spike, "reset to Resting at V_reset");
    active = 1;
    @(negedge clk);
    check(state == N_WAITING, "Active=1 -> Waiting");
    exp_v = V_RESET_DEF;
    // leak: 10 waiting cycles
    repeat (10) begin
      @(negedge clk);
      exp_v -= V_LEAK_DEF;
    end
    check(state == N_WAITING && vmem == fx_t'(exp_v), "linear leak of V_leak per cycle");
    // one-cycle input: synaptic 0.5 + 0.25 and vin 1 mV
    syn_in[0] = 32'sh4000_0000; syn_in[2] = 32'sh2000_0000; vin = 32'sd2147484;
    @(negedge clk);
    clr_in();
    exp_v -= V_LEAK_DEF;                                   // leak in the cycle the input arrived
    check(state == N_INTEGRATING, "Input!=0 -> Integrating");
    @(negedge clk);
    exp_v += (longint'(32'sh6000_0000) >>> SH) + 2147484;
    check(state == N_WAITING && vmem == fx_t'(exp_v), "integration of shifted sum plus V_in, back to Waiting");
    // supra-threshold input: 30 mV directly
    vin = 32'sd64424509;
    @(negedge clk);
    vin = '0;
    check(state == N_INTEGRATING && !spike, "integrating, no spike yet");
    @(negedge clk);
    check(spike && state == N_FIRING, "spike two cycles after input");
    @(negedge clk);
    check(!spike && state == N_WAITING && vmem == V_RESET_DEF, "after firing: Waiting at V_reset");
    // strong inhibition: -1.0 >>> 8 = -3.9 mV below V_reset -> Resting
    syn_in[1] = 32'sh8000_0000;
    @(negedge clk);
    syn_in[1] = '0;
    @(negedge clk);
    check(state == N_RESTING, "V_m < V_reset -> Resting");
    @(negedge clk);
    check(state == N_WAITING && vmem == V_RESET_DEF, "Resting -> Waiting with V_reset");
    // lost arbitration: over threshold but fire_en = 0
    fire_en = 0;
    vin = 32'sd64424509;
    @(negedge clk);
    vin = '0;
    check(cand == 1'b1, "over-threshold neuron is a candidate");
    @(negedge clk);
    check(!spike && state == N_WAITING && vmem >= V_TH_DEF, "no spike when fire_en=0, V_m kept");
    fire_en = 1;
    active = 0;
    @(negedge clk);
    check(state == N_RESTING && vmem == V_RESET_DEF, "Active=0 -> Resting");
    active = 1;
    @(negedge clk);
    // pending input: input in two consecutive cycles, both integrated
    vin = 32'sd10737418;                                 // 5 mV
    @(negedge clk);                                       // -> Integrating, pend = 5 mV
    @(negedge clk);                                       // integrates 5 mV, pend = 5 mV (second cycle)
    vin = '0;
    check(state == N_WAITING && vmem == fx_t'(longint'(V_RESET_DEF) - V_LEAK_DEF + 10737418), "first input integrated");
    @(negedge clk);                                       // Waiting with pend -> Integrating
    @(negedge clk);
    check(vmem == fx_t'(longint'(V_RESET_DEF) - 2 * V_LEAK_DEF + 2 * 10737418), "pending input integrated next");
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
