// snn_pkg: types, constants and helper functions shared by the spiking network.
//
// Numbers are signed 32-bit fixed point with 31 fractional bits (Q1.31), as the
// design's number format: one LSB is 2^-31 of a volt for membrane quantities and
// 2^-31 of full scale for synaptic weights. The voltage constants below are the
// nominal neuron parameters converted to that format (value * 2^31, rounded).
// The layer layout is fixed by three sizes: neurons 0..N_IN-1 are the sensory
// layer, the next N_HID the hippocampal (hidden) layer, the last N_OUT the motor
// layer. The stimulus coding [A1,B1,A2,B2,X,Y] and the dig/move neurons follow
// the experiment's input table; the complement function is this design's
// reading of "A2Y is the complement of A1X".
package snn_pkg;

  localparam int unsigned NB = 32;                 // word width
  typedef logic signed [NB-1:0] fx_t;              // Q1.31 value

  // Neuron constants (Q1.31 volts)
  localparam fx_t V_TH_DEF     = -32'sd107374182;  // -50 mV
  localparam fx_t V_RESET_DEF  = -32'sd150323855;  // -70 mV
  localparam fx_t V_LEAK_DEF   = 32'sd258;         // 1.2e-7 V per waiting step
  localparam fx_t V_INPUT_DEF  = 32'sd2748779;     // 1.28 mV, input layer
  localparam fx_t V_HIDDEN_DEF = 32'sd3178276;     // 1.48 mV, hidden layer
  localparam fx_t V_OUTPUT_DEF = 32'sd3521873;     // 1.64 mV, output layer

  // Synaptic weight range
  localparam fx_t W_MAX_DEF = 32'sh7FFF_FFFF;      // 1.0 (largest Q1.31 value)
  localparam fx_t W_MIN_DEF = 32'sh0000_0000;      // 0.0
  localparam fx_t W_INIT_BASE = 32'sh3000_0000;    // 0.375, low end of initial weights

  // Neuron state machine (Moore): output spike only in N_FIRING
  typedef enum logic [1:0] {
    N_RESTING     = 2'd0,
    N_WAITING     = 2'd1,
    N_INTEGRATING = 2'd2,
    N_FIRING      = 2'd3
  } neuron_state_e;

  // Scheduler phases
  typedef enum logic [2:0] {
    S_IDLE     = 3'd0,
    S_INIT     = 3'd1,
    S_READY    = 3'd2,
    S_BEHAVIOR = 3'd3,
    S_REPLAY   = 3'd4
  } sched_state_e;

  // Layer of neuron i: 0 sensory, 1 hidden, 2 motor
  function automatic int layer_of(int i, int n_in, int n_hid);
    if (i < n_in) return 0;
    else if (i < n_in + n_hid) return 1;
    else return 2;
  endfunction

  // Excitatory plastic synapse from i (pre) to j (post): one layer forward
  function automatic bit is_exc(int i, int j, int n_in, int n_hid);
    return layer_of(j, n_in, n_hid) == layer_of(i, n_in, n_hid) + 1;
  endfunction

  // Inhibitory static synapse: same hidden or same motor layer, no self-connection
  function automatic bit is_inh(int i, int j, int n_in, int n_hid);
    return (i != j) && (layer_of(i, n_in, n_hid) == layer_of(j, n_in, n_hid))
           && (layer_of(i, n_in, n_hid) != 0);
  endfunction

  // Index of the plastic synapse i->j (valid only when is_exc)
  function automatic int plastic_idx(int i, int j, int n_in, int n_hid, int n_out);
    if (i < n_in) return i * n_hid + (j - n_in);
    else return n_in * n_hid + (i - n_in) * n_out + (j - n_in - n_hid);
  endfunction

  // Saturating signed add of two Q1.31 values
  function automatic fx_t sat_add(fx_t a, fx_t b);
    logic signed [NB:0] s;
    s = {a[NB-1], a} + {b[NB-1], b};
    if (s > $signed({2'b00, {(NB-1){1'b1}}}))      return {1'b0, {(NB-1){1'b1}}};
    else if (s < $signed({2'b11, {(NB-1){1'b0}}})) return {1'b1, {(NB-1){1'b0}}};
    else return s[NB-1:0];
  endfunction

  // Stimulus coding [A1,B1,A2,B2,X,Y] (bit 0 = A1). Complementary triplet: the
  // other position of the same context holding the other item.
  function automatic logic [5:0] complement(logic [5:0] t);
    return {t[4], t[5], t[1], t[0], t[3], t[2]};
  endfunction

  // Rewarded triplets: item X in context A, item Y in context B
  function automatic logic rewarded(logic [5:0] t);
    return (t[4] & (t[0] | t[2])) | (t[5] & (t[1] | t[3]));
  endfunction

endpackage
