// history_seq: memory of the latest neuron-activity samples of a trial.
//
// How it works
//   A DEPTH-entry shift register of N-bit activity vectors (bit i = neuron i
//   took part in that behaviour step). `push` shifts the entries one place
//   older and stores `vec` as the newest, hist[0]; the oldest falls out when
//   the register is full. `count` says how many entries are valid (saturates
//   at DEPTH). `clr` empties it at the start of a trial.
//
// Interface and timing
//   Registered: hist/count change one cycle after push or clr; clr wins.
//   Asynchronous active-low reset empties it.
//
// Paper vs. own choice
//   Keeping the two latest stimulus-response activities for the replay unit
//   follows the paper; the vector format (one bit per neuron, filled by the
//   behaviour unit) is this design's choice.
module history_seq #(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 2,
  parameter int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             push,
  input  logic [N-1:0]     vec,
  output logic [N-1:0]     hist [DEPTH],
  output logic [CNT_W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < DEPTH; d++) hist[d] <= '0;
      count <= '0;
    end else if (clr) begin
      for (int d = 0; d < DEPTH; d++) hist[d] <= '0;
      count <= '0;
    end else if (push) begin
      for (int d = DEPTH - 1; d > 0; d--) hist[d] <= hist[d-1];
      hist[0] <= vec;
      if (int'(count) < DEPTH) count <= count + 1'b1;
    end
  end

endmodule
