// controller_unit: the control part of the network.
//
// How it works
//   Groups the scheduler, the weight initialiser (init_synapses), the
//   behaviour unit, the replay unit, the two-entry history and the
//   multiplexer that hands the neurons either the behaviour-phase or the
//   replay-phase input voltages (select from the scheduler). The reward
//   goes to the replay unit; a trial that timed out replays as unrewarded.
//   The scheduler's single Active bit is fanned out to all neurons. The
//   synapses' stored spike times are cleared in the first replay cycle, so
//   no spike of the behaviour phase is paired, and again at every replay
//   window start.
//
// Interface and timing
//   Plain signals towards the synapses (write lanes, inh_load, e_learning,
//   ts_clr, now) and the neurons (vin, active). Reward must be valid in the
//   cycle after the dig pulse, when the replay starts.
//
// Paper vs. own choice
//   The five sub-blocks and the MUX follow the paper's controller; the way
//   they are wired beyond what the paper states is this design's choice.
module controller_unit
  import snn_pkg::*;
#(
  parameter int unsigned N_IN      = 6,
  parameter int unsigned N_HID     = 8,
  parameter int unsigned N_OUT     = 2,
  parameter int unsigned N         = N_IN + N_HID + N_OUT,
  parameter int unsigned N_PLASTIC = N_IN * N_HID + N_HID * N_OUT,
  parameter int unsigned N_LANES   = 4,
  parameter int unsigned IDX_W     = $clog2(N_PLASTIC),
  parameter int unsigned R_BITS    = 8,
  parameter int unsigned T_TRIAL   = 30000,
  parameter int unsigned T_REPLAY  = 130,
  parameter int unsigned TS_W      = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic             start_trial,
  input  logic             reward,
  input  logic [5:0]       triplet,
  input  logic [NB-1:0]    lfsr_seed,
  input  logic [NB-1:0]    lfsr_taps,
  input  logic [N-1:0]     spikes,
  output fx_t              vin [N],
  output logic [N-1:0]     active,
  output logic             e_learning,
  output logic             ts_clr,
  output logic [TS_W-1:0]  now,
  output logic             wr_en   [N_LANES],
  output logic [IDX_W-1:0] wr_idx  [N_LANES],
  output fx_t              wr_data [N_LANES],
  output logic             inh_load,
  output logic             dig,
  output logic             move,
  output logic [5:0]       cur_triplet,
  output logic             trial_done,
  output logic             timeout,
  output logic             replay_fwd,
  output sched_state_e     state
);

  localparam int unsigned DEPTH = 2;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic init_start, init_done, hist_clr, beh_start, beh_en, replay_start;
  logic mux_sel, neuron_active, timed_out, seq_start, replay_done, replay_busy;
  logic push;
  logic [N-1:0]     vec;
  logic [N-1:0]     hist [DEPTH];
  logic [CNT_W-1:0] hist_cnt;
  fx_t              beh_vin [N];
  fx_t              rep_vin [N];

  scheduler #(.T_TRIAL(T_TRIAL), .TS_W(TS_W)) u_sched (
    .clk, .rst_n, .run, .start_trial,
    .init_done, .dig, .move, .seq_start, .replay_done,
    .state, .init_start, .hist_clr, .beh_start, .beh_en, .replay_start,
    .e_learning, .mux_sel, .neuron_active, .trial_done, .timeout, .timed_out, .now
  );

  init_synapses #(.N_PLASTIC(N_PLASTIC), .N_LANES(N_LANES), .R_BITS(R_BITS), .IDX_W(IDX_W)) u_init (
    .clk, .rst_n, .start(init_start), .seed(lfsr_seed), .taps(lfsr_taps),
    .wr_en, .wr_idx, .wr_data, .inh_load, .done(init_done)
  );

  behavior_mode #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT)) u_beh (
    .clk, .rst_n, .en(beh_en), .start(beh_start), .triplet, .spikes,
    .vin(beh_vin), .push, .vec, .dig, .move, .cur_triplet
  );

  history_seq #(.N(N), .DEPTH(DEPTH)) u_hist (
    .clk, .rst_n, .clr(hist_clr), .push, .vec, .hist, .count(hist_cnt)
  );

  replay_mode #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .DEPTH(DEPTH), .T_REPLAY(T_REPLAY)) u_rep (
    .clk, .rst_n, .start(replay_start), .reward(reward && !timed_out),
    .hist, .count(hist_cnt), .spikes, .vin(rep_vin), .seq_start, .busy(replay_busy),
    .fwd(replay_fwd), .done(replay_done)
  );

  // Input-voltage multiplexer
  always_comb begin
    for (int i = 0; i < N; i++) vin[i] = mux_sel ? rep_vin[i] : beh_vin[i];
  end

  assign active = {N{neuron_active}};
  // forget behaviour-phase spike times as the replay begins, then at every window
  assign ts_clr = replay_start | seq_start;

endmodule
