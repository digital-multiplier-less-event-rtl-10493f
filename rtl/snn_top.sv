// snn_top: event-driven spiking network that learns a context-dependent
// stimulus-response task by reinforcement (replay + STDP).
//
// How it works
//   16 LIF neurons in three layers (6 sensory, 8 hidden, 2 motor: dig and
//   move) are wired through a point-to-point crossbar: 64 plastic excitatory
//   synapses feed each layer from the previous one, 58 static inhibitory
//   synapses make the hidden and motor layers winner-take-all groups. The
//   controller initialises the weights from LFSRs on `run`, then per
//   `start_trial` presents the stimulus `triplet` until the network digs,
//   moving to the complementary stimulus on each move, and finally replays
//   the last two steps with learning enabled: forward if `reward` was given,
//   reverse if not. No multiplier is used anywhere: spike x weight is an
//   AND, learning amplitudes are shifts.
//
// Interface and timing
//   One clock (100 MHz in the reference implementation), asynchronous
//   active-low reset. run is a level; start_trial a pulse while `ready`.
//   reward must be valid the cycle after `dig` pulses (typically a function
//   of cur_triplet). trial_done pulses when the replay has finished.
//   lfsr_seed/lfsr_taps configure the initial random weights, w_inh is the
//   inhibitory weight (Q1.31, negative).
//
// Paper vs. own choice
//   Block structure, sizes, fixed-point format and all constants of the
//   neuron and learning rule follow the paper. Port list, reward timing and
//   the choices listed in each sub-module are this design's own.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned N_IN     = 6,
  parameter int unsigned N_HID    = 8,
  parameter int unsigned N_OUT    = 2,
  parameter int unsigned T_TRIAL  = 30000,
  parameter int unsigned T_REPLAY = 130,
  parameter int unsigned W_SHIFT  = 8,
  parameter int unsigned R_BITS   = 8,
  parameter int unsigned N        = N_IN + N_HID + N_OUT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          start_trial,
  input  logic          reward,
  input  logic [5:0]    triplet,
  input  logic [NB-1:0] lfsr_seed,
  input  logic [NB-1:0] lfsr_taps,
  input  fx_t           w_inh,
  output logic          ready,
  output logic          dig,
  output logic          move,
  output logic [5:0]    cur_triplet,
  output logic [N-1:0]  spikes,
  output logic          e_learning,
  output logic          trial_done,
  output logic          timeout
);

  localparam int unsigned N_PLASTIC = N_IN * N_HID + N_HID * N_OUT;
  localparam int unsigned N_LANES   = 4;
  localparam int unsigned IDX_W     = $clog2(N_PLASTIC);
  localparam int unsigned TS_W      = 16;

  fx_t              vin     [N];
  logic [N-1:0]     active;
  logic             ts_clr, inh_load, replay_fwd;
  logic [TS_W-1:0]  now;
  logic             wr_en   [N_LANES];
  logic [IDX_W-1:0] wr_idx  [N_LANES];
  fx_t              wr_data [N_LANES];
  fx_t              w       [N][N];
  fx_t              syn_in  [N][N];
  fx_t              vmem    [N];
  neuron_state_e    nstate  [N];
  sched_state_e     state;
  logic [N_PLASTIC-1:0] ltp, ltd;

  controller_unit #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .N_LANES(N_LANES), .R_BITS(R_BITS),
    .T_TRIAL(T_TRIAL), .T_REPLAY(T_REPLAY), .TS_W(TS_W)
  ) u_ctrl (
    .clk, .rst_n, .run, .start_trial, .reward, .triplet, .lfsr_seed, .lfsr_taps,
    .spikes, .vin, .active, .e_learning, .ts_clr, .now,
    .wr_en, .wr_idx, .wr_data, .inh_load,
    .dig, .move, .cur_triplet, .trial_done, .timeout, .replay_fwd, .state
  );

  synapses_core #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .N_LANES(N_LANES), .TS_W(TS_W), .DT_MAX(T_REPLAY)
  ) u_syn (
    .clk, .rst_n, .spikes, .now, .e_learning, .ts_clr,
    .wr_en, .wr_idx, .wr_data, .inh_load, .inh_value(w_inh),
    .w, .ltp, .ltd
  );

  synaptic_crossbar #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT)) u_xbar (
    .spikes, .w, .syn_in
  );

  neurons_core #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .W_SHIFT(W_SHIFT)) u_neur (
    .clk, .rst_n, .active, .syn_in, .vin, .spikes, .vmem, .states(nstate)
  );

  assign ready = (state == S_READY);

endmodule
