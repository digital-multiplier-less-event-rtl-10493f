// config_lfsr: configurable linear feedback shift register.
//
// How it works
//   A Galois LFSR: each step shifts the register right by one and, when the
//   bit shifted out is 1, XORs the run-time tap mask `taps` (the feedback
//   polynomial) into the register. Both the start value (`seed`) and the
//   polynomial are inputs, so the random sequence can be chosen per run.
//   A zero seed would lock the register at zero, so it is replaced by 1.
//
// Interface and timing
//   load has priority over en; the new value appears on q one cycle after
//   the edge. Asynchronous active-low reset to 1.
//
// Paper vs. own choice
//   A configurable LFSR (arbitrary seed and polynomial, flip-flops in a row
//   with XOR feedback) is what the paper uses to draw initial weights; the
//   Galois form, the width and the zero-seed guard are this design's choices.
module config_lfsr #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic [WIDTH-1:0] taps,
  input  logic             en,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= WIDTH'(1);
    end else if (load) begin
      r_q <= (seed == '0) ? WIDTH'(1) : seed;
    end else if (en) begin
      r_q <= (r_q >> 1) ^ (r_q[0] ? taps : '0);
    end
  end

  assign q = r_q;

endmodule
