// neurons_core: the row of all neurons of the network.
//
// How it works
//   One lif_neuron per network neuron, N = N_IN + N_HID + N_OUT (6 sensory,
//   8 hidden, 2 motor by default), all with the same threshold, reset and
//   leak. Neuron j gets the row syn_in[j] of gated weights from the crossbar,
//   its own direct input voltage vin[j] and its own Active bit.
//   The hidden and the motor layer are hard winner-take-all groups. Their
//   lateral inhibition reaches the other neurons only one cycle after a
//   spike, so neurons crossing the threshold in the same cycle would all
//   fire. A margin around the threshold settles this: among the neurons of
//   one such layer that cross in the same cycle, only those whose new V_m is
//   within V_MARGIN of the highest fire; the others stay below the spike and
//   receive the winner's inhibition next. With V_MARGIN = 0 only the highest
//   fires (exact ties all fire).
//
// Interface and timing
//   Same timing as lif_neuron: spikes are registered one-cycle pulses, the
//   first one two cycles after an input. Index order: sensory, hidden, motor.
//
// Paper vs. own choice
//   Neurons "sorted in a row" with shared LIF parameters follow the paper, as
//   does a margin around the threshold for the hard winner-take-all; how the
//   margin acts (a same-cycle comparison of the crossing neurons) and its
//   value, and the W_SHIFT value, are this design's choices.
module neurons_core
  import snn_pkg::*;
#(
  parameter int unsigned N_IN    = 6,
  parameter int unsigned N_HID   = 8,
  parameter int unsigned N_OUT   = 2,
  parameter int unsigned N       = N_IN + N_HID + N_OUT,
  parameter int unsigned W_SHIFT = 8,
  parameter fx_t         V_TH    = V_TH_DEF,
  parameter fx_t         V_RESET = V_RESET_DEF,
  parameter fx_t         V_LEAK  = V_LEAK_DEF,
  parameter fx_t         V_MARGIN = 32'sd0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  active,
  input  fx_t           syn_in [N][N],
  input  fx_t           vin    [N],
  output logic [N-1:0]  spikes,
  output fx_t           vmem   [N],
  output neuron_state_e states [N]
);

  logic [N-1:0] cand, fire_en;
  fx_t          vm_cand [N];
  fx_t          layer_max [3];

  // Winner-take-all margin: in the hidden and motor layers a candidate fires
  // only if its new V_m is within V_MARGIN of the highest candidate of its
  // layer in this cycle. The sensory layer is not a WTA group.
  always_comb begin
    for (int l = 0; l < 3; l++) layer_max[l] = 32'sh8000_0000;
    for (int j = 0; j < N; j++)
      if (cand[j] && vm_cand[j] > layer_max[layer_of(j, N_IN, N_HID)])
        layer_max[layer_of(j, N_IN, N_HID)] = vm_cand[j];
    for (int j = 0; j < N; j++)
      fire_en[j] = (layer_of(j, N_IN, N_HID) == 0) ||
                   (sat_add(vm_cand[j], V_MARGIN) >= layer_max[layer_of(j, N_IN, N_HID)]);
  end

  for (genvar j = 0; j < N; j++) begin : g_neuron
    lif_neuron #(
      .N_FANIN(N), .W_SHIFT(W_SHIFT), .V_TH(V_TH), .V_RESET(V_RESET), .V_LEAK(V_LEAK)
    ) u_neuron (
      .clk   (clk),
      .rst_n (rst_n),
      .active(active[j]),
      .syn_in(syn_in[j]),
      .vin   (vin[j]),
      .fire_en(fire_en[j]),
      .cand  (cand[j]),
      .vm_cand(vm_cand[j]),
      .spike (spikes[j]),
      .vmem  (vmem[j]),
      .state (states[j])
    );
  end

endmodule
