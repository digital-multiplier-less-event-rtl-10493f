// behavior_mode: drives the network while the agent acts on a stimulus.
//
// How it works
//   `start` loads the starting triplet (coding [A1,B1,A2,B2,X,Y], bit 0 = A1,
//   one place bit and one item bit set). While `en` is high, every sensory
//   neuron whose triplet bit is set gets the constant input V_INPUT; the
//   other neurons get nothing from this unit. For each layer the unit keeps
//   the latest spike vector of that layer (the last winner of the hidden
//   winner-take-all, the stimulus neurons, the acting motor neuron); the
//   three together form the activity sample of the step. A spike of the motor neuron DIG_IDX is a
//   "dig", a spike of MOVE_IDX a "move" (dig wins a tie). On either action
//   the unit pushes the activity vector (including this cycle's spikes) to
//   the history and clears it. On a move the stimulus becomes the
//   complementary triplet, the other position of the same context with the
//   other item (A1X <-> A2Y, A1Y <-> A2X, ...). A dig ends the phase; the
//   scheduler then starts the replay.
//
// Interface and timing
//   dig/move/push/vec are registered: they pulse one cycle after the output
//   spike. cur_triplet changes in the same cycle as the move pulse.
//
// Paper vs. own choice
//   Constant input to the stimulus neurons, moves between the two triplets
//   of a context, ending on dig, and sampling the neurons after each action
//   follow the paper; the activity-vector format and the dig-over-move
//   priority are this design's choices. The triplet coding is that of the
//   experiment's input table, which fixes N_IN at 6.
module behavior_mode
  import snn_pkg::*;
#(
  parameter int unsigned N_IN     = 6,
  parameter int unsigned N_HID    = 8,
  parameter int unsigned N_OUT    = 2,
  parameter int unsigned N        = N_IN + N_HID + N_OUT,
  parameter int unsigned DIG_IDX  = N_IN + N_HID,
  parameter int unsigned MOVE_IDX = N_IN + N_HID + 1,
  parameter fx_t         V_INPUT  = V_INPUT_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            start,
  input  logic [5:0]      triplet,
  input  logic [N-1:0]    spikes,
  output fx_t             vin [N],
  output logic            push,
  output logic [N-1:0]    vec,
  output logic            dig,
  output logic            move,
  output logic [5:0]      cur_triplet
);

  if (N_IN != 6) begin : g_bad_size
    $error("behavior_mode: the stimulus coding needs N_IN = 6");
  end

  logic [5:0]   trip_q;
  logic [N-1:0] seen_q;     // latest spike vector of each layer
  logic [N-1:0] seen_n;     // same, including this cycle's spikes
  logic [N-1:0] lay_mask [3];

  always_comb begin
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < N; i++) lay_mask[l][i] = (layer_of(i, N_IN, N_HID) == l);
    seen_n = seen_q;
    for (int l = 0; l < 3; l++)
      if ((spikes & lay_mask[l]) != '0) seen_n = (seen_n & ~lay_mask[l]) | (spikes & lay_mask[l]);
  end

  always_comb begin
    for (int i = 0; i < N; i++) vin[i] = '0;
    for (int i = 0; i < 6; i++) vin[i] = (en && trip_q[i]) ? V_INPUT : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trip_q <= '0;
      seen_q <= '0;
      push   <= 1'b0;
      vec    <= '0;
      dig    <= 1'b0;
      move   <= 1'b0;
    end else begin
      push <= 1'b0;
      dig  <= 1'b0;
      move <= 1'b0;
      if (start) begin
        trip_q <= triplet;
        seen_q <= '0;
      end else if (en) begin
        if (spikes[DIG_IDX] || spikes[MOVE_IDX]) begin
          push   <= 1'b1;
          vec    <= seen_n;
          seen_q <= '0;
          if (spikes[DIG_IDX]) begin
            dig <= 1'b1;
          end else begin
            move   <= 1'b1;
            trip_q <= complement(trip_q);
          end
        end else begin
          seen_q <= seen_n;
        end
      end
    end
  end

  assign cur_triplet = trip_q;

endmodule
