// synaptic_crossbar: point-to-point connection matrix between all neurons.
//
// How it works
//   For every post-synaptic neuron j and pre-synaptic neuron i it forwards
//   W[i][j] when neuron i spikes and the pair is connected, and 0 otherwise.
//   This is the product A_i * W[i][j] of the neuron equation done with an AND
//   gate instead of a multiplier. Connections: excitatory from every sensory
//   neuron to every hidden neuron and from every hidden neuron to every motor
//   neuron; inhibitory between all pairs inside the hidden layer and inside
//   the motor layer, without self-connections (these two layers are
//   winner-take-all groups).
//
// Interface and timing
//   Purely combinational. syn_in[j][i] is the contribution of neuron i to
//   neuron j. Neurons are numbered sensory, then hidden, then motor.
//
// Paper vs. own choice
//   The topology and the point-to-point wiring follow the paper; the
//   array layout is this design's choice.
module synaptic_crossbar
  import snn_pkg::*;
#(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned N_HID = 8,
  parameter int unsigned N_OUT = 2,
  parameter int unsigned N     = N_IN + N_HID + N_OUT
) (
  input  logic [N-1:0] spikes,
  input  fx_t          w      [N][N],   // w[pre][post]
  output fx_t          syn_in [N][N]    // syn_in[post][pre]
);

  for (genvar j = 0; j < N; j++) begin : g_post
    for (genvar i = 0; i < N; i++) begin : g_pre
      if (is_exc(i, j, N_IN, N_HID) || is_inh(i, j, N_IN, N_HID)) begin : g_conn
        assign syn_in[j][i] = spikes[i] ? w[i][j] : '0;
      end else begin : g_none
        assign syn_in[j][i] = '0;
      end
    end
  end

endmodule
