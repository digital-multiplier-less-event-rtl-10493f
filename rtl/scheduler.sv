// scheduler: sequences the whole experiment.
//
// How it works
//   S_IDLE     waits for `run`, then pulses init_start and goes to S_INIT.
//   S_INIT     waits for init_done (initial weights written) -> S_READY.
//   S_READY    neurons rest; on start_trial pulses beh_start and hist_clr and
//              enters S_BEHAVIOR. Leaving `run` low returns to S_IDLE.
//   S_BEHAVIOR behaviour phase (beh_en, MUX selects the behaviour inputs).
//              A dig pulses replay_start and enters S_REPLAY. If no dig comes
//              within T_TRIAL cycles, `timeout` pulses, `timed_out` is set for
//              the trial and the replay starts anyway (as unrewarded).
//   S_REPLAY   e_learning = 1, MUX selects the replay inputs; on replay_done
//              trial_done pulses and the scheduler returns to S_READY.
//   Neurons are Active in S_BEHAVIOR and S_REPLAY except in the cycle of an
//   action (behaviour) or of a new replay window, which resets them to rest.
//   `now` is a free-running time stamp for the synapses.
//
// Interface and timing
//   All control outputs except neuron_active are registered or decoded from
//   the state register; pulses last one cycle. Asynchronous active-low reset.
//
// Paper vs. own choice
//   run/start-trial inputs, initialisation, behaviour until dig, replay with
//   E-learning and the MUX select follow the paper, as does T_trial = 30000
//   cycles. The READY state, the timeout handling and the one-cycle neuron
//   resets are this design's choices.
module scheduler
  import snn_pkg::*;
#(
  parameter int unsigned T_TRIAL = 30000,
  parameter int unsigned TS_W    = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            run,
  input  logic            start_trial,
  input  logic            init_done,
  input  logic            dig,
  input  logic            move,
  input  logic            seq_start,
  input  logic            replay_done,
  output sched_state_e    state,
  output logic            init_start,
  output logic            hist_clr,
  output logic            beh_start,
  output logic            beh_en,
  output logic            replay_start,
  output logic            e_learning,
  output logic            mux_sel,
  output logic            neuron_active,
  output logic            trial_done,
  output logic            timeout,
  output logic            timed_out,
  output logic [TS_W-1:0] now
);

  localparam int unsigned TT_W = $clog2(T_TRIAL + 1);

  sched_state_e    st_q;
  logic [TT_W-1:0] timer_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= S_IDLE;
      timer_q      <= '0;
      init_start   <= 1'b0;
      hist_clr     <= 1'b0;
      beh_start    <= 1'b0;
      replay_start <= 1'b0;
      trial_done   <= 1'b0;
      timeout      <= 1'b0;
      timed_out    <= 1'b0;
      now          <= '0;
    end else begin
      now          <= now + 1'b1;
      init_start   <= 1'b0;
      hist_clr     <= 1'b0;
      beh_start    <= 1'b0;
      replay_start <= 1'b0;
      trial_done   <= 1'b0;
      timeout      <= 1'b0;
      unique case (st_q)
        S_IDLE: if (run) begin
          st_q       <= S_INIT;
          init_start <= 1'b1;
        end
        S_INIT: if (init_done && !init_start) st_q <= S_READY;
        S_READY: begin
          if (!run) begin
            st_q <= S_IDLE;
          end else if (start_trial) begin
            st_q      <= S_BEHAVIOR;
            beh_start <= 1'b1;
            hist_clr  <= 1'b1;
            timer_q   <= '0;
            timed_out <= 1'b0;
          end
        end
        S_BEHAVIOR: begin
          timer_q <= timer_q + 1'b1;
          if (dig) begin
            st_q         <= S_REPLAY;
            replay_start <= 1'b1;
          end else if (int'(timer_q) >= T_TRIAL - 1) begin
            st_q         <= S_REPLAY;
            replay_start <= 1'b1;
            timeout      <= 1'b1;
            timed_out    <= 1'b1;
          end
        end
        S_REPLAY: if (replay_done) begin
          st_q       <= S_READY;
          trial_done <= 1'b1;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign state         = st_q;
  assign beh_en        = (st_q == S_BEHAVIOR) && !beh_start;
  assign e_learning    = (st_q == S_REPLAY);
  assign mux_sel       = (st_q == S_REPLAY);
  assign neuron_active = ((st_q == S_BEHAVIOR) && !beh_start && !dig && !move) ||
                         ((st_q == S_REPLAY) && !replay_start && !seq_start);

endmodule
