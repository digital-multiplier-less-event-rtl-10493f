// plastic_synapse: excitatory synapse with a shift-only STDP rule.
//
// How it works
//   The synapse remembers the time stamp of the latest pre- and post-synaptic
//   spike (with a valid flag each). In every cycle in which e_learning is
//   high and both times are stored it computes dt = T_post - T_pre and
//   updates its weight:
//     dt > 0 (pre before post):  W += (W_MAX - W) >>> AP_SHIFT     (LTP, A+ = 2^-10)
//     dt < 0 (post before pre):  W -= (W - W_MIN) >>> AM_SHIFT     (LTD, A- = -2^-11)
//     dt = 0 or |dt| > DT_MAX:   W unchanged
//   The result is clamped to [W_MIN, W_MAX]. No multiplier is used: the
//   amplitudes are powers of two, so the product is a shift. Because the
//   step repeats every cycle until the learning window ends, the total change
//   of one pairing grows with how early in the window it happened, and the
//   weight approaches its bound geometrically. A later spike replaces the
//   stored time, so the pairing (and the sign) follows the latest spikes.
//   ts_clr forgets both stored times (used at the start of every replayed
//   sequence); wr_en loads an initial weight from the initialisation unit.
//
// Interface and timing
//   pre/post are one-cycle spike pulses; `now` is a free-running time stamp.
//   Times are stored at the edge after the spike; the first update happens at
//   the following edge, and ltp/ltd pulse in the cycle the new w appears.
//   Asynchronous active-low reset: W = 0, no stored times.
//
// Paper vs. own choice
//   The amplitudes 2^-10 / 2^-11, the weight range, storing T_pre/T_post,
//   gating by E_learning and an update that depends on the present weight
//   follow the paper. The paper states the weight dependence two ways
//   (W_MAX - W in its simplified equation, W in its algorithm); this design
//   uses W_MAX - W for LTP and W - W_MIN for LTD, the soft bounds of the
//   original rule, so that the weight can settle inside the range. The sign
//   convention follows the paper's prose (pre before post potentiates), the
//   per-cycle update reads the paper's "while E_learning" loop literally; the
//   nearest-spike pairing and the DT_MAX window value are this design's
//   choices.
module plastic_synapse
  import snn_pkg::*;
#(
  parameter int unsigned TS_W     = 16,
  parameter int unsigned AP_SHIFT = 10,
  parameter int unsigned AM_SHIFT = 11,
  parameter int unsigned DT_MAX   = 130,
  parameter fx_t         W_MAX    = W_MAX_DEF,
  parameter fx_t         W_MIN    = W_MIN_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            pre,
  input  logic            post,
  input  logic [TS_W-1:0] now,
  input  logic            e_learning,
  input  logic            ts_clr,
  input  logic            wr_en,
  input  fx_t             wr_data,
  output fx_t             w,
  output logic            ltp,
  output logic            ltd
);

  logic [TS_W-1:0] t_pre_q, t_post_q;
  logic            v_pre_q, v_post_q;
  fx_t             w_q;

  logic [TS_W-1:0]       diff;
  logic signed [TS_W:0]  dt;
  logic                  pair, do_ltp, do_ltd;
  logic signed [NB:0]    room, step, w_new;   // one guard bit

  always_comb begin
    diff     = t_post_q - t_pre_q;                 // modulo 2^TS_W, wrap-safe
    dt       = $signed({diff[TS_W-1], diff});
    // eligible while learning is enabled and both spike times are stored
    pair     = e_learning && !ts_clr && v_pre_q && v_post_q;
    do_ltp   = pair && (dt > 0) && (dt <= $signed((TS_W+1)'(DT_MAX)));
    do_ltd   = pair && (dt < 0) && (-dt <= $signed((TS_W+1)'(DT_MAX)));
    // LTP grows with the room to W_MAX, LTD with the distance from W_MIN
    if (do_ltp) room = $signed({W_MAX[NB-1], W_MAX}) - $signed({w_q[NB-1], w_q});
    else        room = $signed({w_q[NB-1], w_q}) - $signed({W_MIN[NB-1], W_MIN});
    step     = do_ltp ? (room >>> AP_SHIFT) : (room >>> AM_SHIFT);
    if (do_ltp)      w_new = $signed({w_q[NB-1], w_q}) + step;
    else if (do_ltd) w_new = $signed({w_q[NB-1], w_q}) - step;
    else             w_new = $signed({w_q[NB-1], w_q});
    if (w_new > $signed({W_MAX[NB-1], W_MAX}))      w_new = $signed({W_MAX[NB-1], W_MAX});
    else if (w_new < $signed({W_MIN[NB-1], W_MIN})) w_new = $signed({W_MIN[NB-1], W_MIN});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_pre_q  <= '0;
      t_post_q <= '0;
      v_pre_q  <= 1'b0;
      v_post_q <= 1'b0;
      w_q      <= '0;
      ltp      <= 1'b0;
      ltd      <= 1'b0;
    end else begin
      ltp <= 1'b0;
      ltd <= 1'b0;
      if (ts_clr) begin
        v_pre_q  <= 1'b0;
        v_post_q <= 1'b0;
      end else begin
        if (pre)  begin t_pre_q  <= now; v_pre_q  <= 1'b1; end
        if (post) begin t_post_q <= now; v_post_q <= 1'b1; end
      end
      if (wr_en) begin
        w_q <= wr_data;
      end else begin
        w_q <= w_new[NB-1:0];
        ltp <= do_ltp;
        ltd <= do_ltd;
      end
    end
  end

  assign w = w_q;

endmodule
