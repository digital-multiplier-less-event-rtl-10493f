// lif_neuron: multiplier-less leaky integrate-and-fire neuron built as a
// four-state Moore machine (Resting, Waiting, Integrating, Firing).
//
// How it works
//   * Input: an array of gated synaptic weights (A_i*W[i][j] is already 0 or W,
//     so no multiplier is needed) and a direct input voltage vin. The weights
//     are summed in a wide adder, arithmetically right-shifted by W_SHIFT (the
//     barrel shifter that scales weight units to volts) and added to vin.
//   * Resting:     V_m = V_reset; leaves for Waiting when `active` is 1.
//   * Waiting:     V_m -= V_leak every cycle (linear leak). A non-zero input
//                  moves the neuron to Integrating; `active`=0 sends it back
//                  to Resting.
//   * Integrating: V_m += pending input. Next state from the new V_m:
//                  >= V_th -> Firing, < V_reset -> Resting, else Waiting.
//                  A neuron over threshold is a firing candidate (cand,
//                  vm_cand); it fires only if fire_en is 1, otherwise it keeps
//                  its V_m and returns to Waiting. fire_en comes from the
//                  winner-take-all arbitration in neurons_core (tie it to 1
//                  for a stand-alone neuron).
//   * Firing:      spike = 1 for one cycle, V_m = V_reset, then Waiting.
//   Input that arrives while the neuron is Integrating is kept in a pending
//   register and added at the next integration, so a one-cycle pre-synaptic
//   spike is never lost; input during Firing or Resting is dropped.
//   All sums saturate to the 32-bit range.
//
// Interface and timing
//   syn_in/vin are sampled at a clock edge; the earliest spike is two cycles
//   after the input (Waiting -> Integrating -> Firing) and `spike` is a
//   registered one-cycle pulse. Asynchronous active-low reset to Resting.
//
// Paper vs. own choice
//   The four states, their equations, the leak, the adder + barrel shifter +
//   comparator structure and the constants (V_th -50 mV, V_reset -70 mV, leak
//   1.2e-7 V, Q1.31 numbers) follow the paper. The shift amount, the pending
//   input register, firing at V_m == V_th, saturation and the fire_en hook
//   used for the winner-take-all margin are this design's choices.
module lif_neuron
  import snn_pkg::*;
#(
  parameter int unsigned N_FANIN = 16,
  parameter int unsigned W_SHIFT = 8,
  parameter fx_t         V_TH    = V_TH_DEF,
  parameter fx_t         V_RESET = V_RESET_DEF,
  parameter fx_t         V_LEAK  = V_LEAK_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          active,
  input  fx_t           syn_in [N_FANIN],
  input  fx_t           vin,
  input  logic          fire_en,
  output logic          cand,
  output fx_t           vm_cand,
  output logic          spike,
  output fx_t           vmem,
  output neuron_state_e state
);

  localparam int unsigned SW = NB + $clog2(N_FANIN + 1) + 1;  // sum width

  neuron_state_e state_q, state_d;
  fx_t           vm_q, vm_d;
  fx_t           pend_q, pend_d;

  logic signed [SW-1:0] wsum, wshift;
  fx_t                  in_now;   // this cycle's input in volts
  fx_t                  vm_int;   // V_m after integration

  // Synaptic adder and barrel shifter
  always_comb begin
    wsum = '0;
    for (int i = 0; i < N_FANIN; i++) wsum += SW'(syn_in[i]);
    wshift = wsum >>> W_SHIFT;
    // saturate the shifted sum to 32 bits, then add the direct input
    if (wshift > SW'(W_MAX_DEF))                   in_now = sat_add(W_MAX_DEF, vin);
    else if (wshift < SW'($signed(32'sh8000_0000))) in_now = sat_add(32'sh8000_0000, vin);
    else                                           in_now = sat_add(fx_t'(wshift), vin);
  end

  assign vm_int = sat_add(vm_q, pend_q);

  always_comb begin
    state_d = state_q;
    vm_d    = vm_q;
    pend_d  = pend_q;
    unique case (state_q)
      N_RESTING: begin
        vm_d   = V_RESET;
        pend_d = '0;
        if (active) state_d = N_WAITING;
      end
      N_WAITING: begin
        vm_d = sat_add(vm_q, -V_LEAK);
        if (!active) begin
          state_d = N_RESTING;
          vm_d    = V_RESET;
          pend_d  = '0;
        end else if (in_now != '0 || pend_q != '0) begin
          state_d = N_INTEGRATING;
          pend_d  = sat_add(pend_q, in_now);
        end
      end
      N_INTEGRATING: begin
        vm_d   = vm_int;
        pend_d = in_now;                 // input arriving now waits one step
        if (!active) begin
          state_d = N_RESTING;
          vm_d    = V_RESET;
          pend_d  = '0;
        end else if (vm_int >= V_TH && fire_en) begin
          state_d = N_FIRING;
        end else if (vm_int >= V_TH) begin
          state_d = N_WAITING;           // lost the winner-take-all arbitration
        end else if (vm_int < V_RESET) begin
          state_d = N_RESTING;
          pend_d  = '0;
        end else begin
          state_d = N_WAITING;
        end
      end
      N_FIRING: begin
        vm_d    = V_RESET;
        pend_d  = '0;
        state_d = active ? N_WAITING : N_RESTING;
      end
      default: state_d = N_RESTING;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= N_RESTING;
      vm_q    <= V_RESET;
      pend_q  <= '0;
    end else begin
      state_q <= state_d;
      vm_q    <= vm_d;
      pend_q  <= pend_d;
    end
  end

  // firing candidate for the layer's winner-take-all arbitration
  assign cand    = (state_q == N_INTEGRATING) && active && (vm_int >= V_TH);
  assign vm_cand = vm_int;

  assign spike = (state_q == N_FIRING);
  assign vmem  = vm_q;
  assign state = state_q;

endmodule
