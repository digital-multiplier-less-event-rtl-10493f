// synapses_core: storage and learning for every synapse of the network.
//
// How it works
//   * N_IN*N_HID + N_HID*N_OUT plastic excitatory synapses (64 by default),
//     each a plastic_synapse with its own weight and spike-time registers.
//     Plastic synapse k: k = i*N_HID + h for sensory i -> hidden h, then
//     N_IN*N_HID + h*N_OUT + o for hidden h -> motor o.
//   * One static register per inhibitory synapse (58 by default: 56 inside
//     the hidden layer, 2 inside the motor layer), all loaded with inh_value
//     when inh_load pulses and never changed by learning.
//   The weights are presented as a full N x N matrix w[pre][post], zero where
//   no synapse exists, for the crossbar.
//
// Interface and timing
//   Initial plastic weights arrive on N_LANES write lanes (wr_en/wr_idx/
//   wr_data), one synapse per lane per cycle. e_learning enables the STDP
//   update; ts_clr makes all synapses forget stored spike times. ltp/ltd are
//   the per-synapse one-cycle update pulses. Asynchronous active-low reset.
//
// Paper vs. own choice
//   The synapse counts, the plastic/static split and a single strong
//   inhibitory value follow the paper; numbering and the write lanes are
//   this design's choices.
module synapses_core
  import snn_pkg::*;
#(
  parameter int unsigned N_IN      = 6,
  parameter int unsigned N_HID     = 8,
  parameter int unsigned N_OUT     = 2,
  parameter int unsigned N         = N_IN + N_HID + N_OUT,
  parameter int unsigned N_PLASTIC = N_IN * N_HID + N_HID * N_OUT,
  parameter int unsigned N_LANES   = 4,
  parameter int unsigned IDX_W     = $clog2(N_PLASTIC),
  parameter int unsigned TS_W      = 16,
  parameter int unsigned AP_SHIFT  = 10,
  parameter int unsigned AM_SHIFT  = 11,
  parameter int unsigned DT_MAX    = 130
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     spikes,
  input  logic [TS_W-1:0]  now,
  input  logic             e_learning,
  input  logic             ts_clr,
  input  logic             wr_en   [N_LANES],
  input  logic [IDX_W-1:0] wr_idx  [N_LANES],
  input  fx_t              wr_data [N_LANES],
  input  logic             inh_load,
  input  fx_t              inh_value,
  output fx_t              w       [N][N],
  output logic [N_PLASTIC-1:0] ltp,
  output logic [N_PLASTIC-1:0] ltd
);

  fx_t w_pl [N_PLASTIC];

  for (genvar i = 0; i < N; i++) begin : g_pre
    for (genvar j = 0; j < N; j++) begin : g_post
      if (is_exc(i, j, N_IN, N_HID)) begin : g_exc
        localparam int K = plastic_idx(i, j, N_IN, N_HID, N_OUT);
        logic k_wr;
        fx_t  k_data;
        always_comb begin
          k_wr   = 1'b0;
          k_data = '0;
          for (int l = 0; l < N_LANES; l++) begin
            if (wr_en[l] && int'(wr_idx[l]) == K) begin
              k_wr   = 1'b1;
              k_data = wr_data[l];
            end
          end
        end
        plastic_synapse #(
          .TS_W(TS_W), .AP_SHIFT(AP_SHIFT), .AM_SHIFT(AM_SHIFT), .DT_MAX(DT_MAX)
        ) u_syn (
          .clk       (clk),
          .rst_n     (rst_n),
          .pre       (spikes[i]),
          .post      (spikes[j]),
          .now       (now),
          .e_learning(e_learning),
          .ts_clr    (ts_clr),
          .wr_en     (k_wr),
          .wr_data   (k_data),
          .w         (w_pl[K]),
          .ltp       (ltp[K]),
          .ltd       (ltd[K])
        );
        assign w[i][j] = w_pl[K];
      end else if (is_inh(i, j, N_IN, N_HID)) begin : g_inh
        fx_t w_inh_q;
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n)        w_inh_q <= '0;
          else if (inh_load) w_inh_q <= inh_value;
        end
        assign w[i][j] = w_inh_q;
      end else begin : g_none
        assign w[i][j] = '0;
      end
    end
  end

endmodule
