// replay_mode: replays the stored behaviour steps so STDP can learn from them.
//
// How it works
//   `start` latches the reward. The stored samples (hist[0] newest, `count`
//   valid) are replayed one after another, each in a window of T_REPLAY
//   cycles. Rewarded trials replay oldest sample first and in forward layer
//   order; unrewarded trials newest first and in reverse layer order.
//   Window cycle 0 pulses seq_start (neurons reset, synapses forget spike
//   times). The rest of the window is cut into three phases of T_REPLAY/3
//   cycles; in each phase the recorded neurons of one layer get their layer's
//   input voltage: forward sensory, hidden, motor; reverse motor, hidden,
//   sensory. A neuron stops being driven once it has spiked in the window,
//   so every recorded neuron fires once and no charge is left over to make
//   it fire again out of order. So pre-synaptic neurons fire before post-synaptic ones in a
//   rewarded replay (potentiation) and after them in an unrewarded one
//   (depression).
//
// Interface and timing
//   start: one-cycle pulse; replay takes count * T_REPLAY cycles, then `done`
//   pulses for one cycle (the cycle after start if count is 0). `fwd` shows
//   the direction of the running replay.
//
// Paper vs. own choice
//   Forward replay after reward, reverse replay without, the 130-cycle window
//   and the per-layer input voltages (1.28/1.48/1.64 mV) follow the paper.
//   Making the order with three staggered drive phases, stopping the drive
//   after the first spike, the order of the
//   samples and latching the reward at start are this design's choices.
module replay_mode
  import snn_pkg::*;
#(
  parameter int unsigned N_IN     = 6,
  parameter int unsigned N_HID    = 8,
  parameter int unsigned N_OUT    = 2,
  parameter int unsigned N        = N_IN + N_HID + N_OUT,
  parameter int unsigned DEPTH    = 2,
  parameter int unsigned CNT_W    = $clog2(DEPTH + 1),
  parameter int unsigned T_REPLAY = 130,
  parameter fx_t         V_INPUT  = V_INPUT_DEF,
  parameter fx_t         V_HIDDEN = V_HIDDEN_DEF,
  parameter fx_t         V_OUTPUT = V_OUTPUT_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             reward,
  input  logic [N-1:0]     hist [DEPTH],
  input  logic [CNT_W-1:0] count,
  input  logic [N-1:0]     spikes,
  output fx_t              vin [N],
  output logic             seq_start,
  output logic             busy,
  output logic             fwd,
  output logic             done
);

  localparam int unsigned PH  = T_REPLAY / 3;
  localparam int unsigned T_W = $clog2(T_REPLAY);

  logic             run_q;
  logic [T_W-1:0]   t_q;
  logic [CNT_W-1:0] k_q;      // replay step
  logic             fwd_q;
  logic [N-1:0]     cur;      // sample being replayed
  logic [N-1:0]     fired_q;  // neurons that spiked in this window
  int               phase, drv_layer, entry;

  always_comb begin
    entry = fwd_q ? (int'(count) - 1 - int'(k_q)) : int'(k_q);
    if (entry < 0) entry = 0;
    cur = hist[entry];
    if (int'(t_q) < PH)          phase = 0;
    else if (int'(t_q) < 2 * PH) phase = 1;
    else                         phase = 2;
    drv_layer = fwd_q ? phase : 2 - phase;
    for (int i = 0; i < N; i++) begin
      vin[i] = '0;
      if (run_q && t_q != '0 && cur[i] && !fired_q[i] && layer_of(i, N_IN, N_HID) == drv_layer) begin
        case (drv_layer)
          0:       vin[i] = V_INPUT;
          1:       vin[i] = V_HIDDEN;
          default: vin[i] = V_OUTPUT;
        endcase
      end
    end
  end

  assign seq_start = run_q && (t_q == '0);
  assign busy      = run_q;
  assign fwd       = fwd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0;
      t_q   <= '0;
      k_q   <= '0;
      fwd_q <= 1'b0;
      done  <= 1'b0;
      fired_q <= '0;
    end else begin
      done <= 1'b0;
      fired_q <= (seq_start || start) ? '0 : (fired_q | spikes);
      if (start) begin
        fwd_q <= reward;
        t_q   <= '0;
        k_q   <= '0;
        if (count == '0) done  <= 1'b1;
        else             run_q <= 1'b1;
      end else if (run_q) begin
        if (int'(t_q) == T_REPLAY - 1) begin
          t_q <= '0;
          if (int'(k_q) + 1 >= int'(count)) begin
            run_q <= 1'b0;
            done  <= 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end else begin
          t_q <= t_q + 1'b1;
        end
      end
    end
  end

endmodule
