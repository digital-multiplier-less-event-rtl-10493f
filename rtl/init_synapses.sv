// init_synapses: draws the initial weights of all plastic synapses and
// triggers loading of the static inhibitory weights.
//
// How it works
//   N_LANES configurable LFSRs run in parallel. On `start` every lane's LFSR
//   is loaded with seed XOR (lane * 0x9E3779B9) and the common polynomial
//   `taps`. Then, one cycle per group, lane l writes synapse base+l with
//       W = 0.375 + r * 2^-(2+R_BITS),   r = low R_BITS bits of its LFSR,
//   i.e. a value spread evenly over [0.375, 0.625), around the middle of the
//   weight range, and steps its LFSR. After the last group `inh_load` pulses
//   for one cycle so the inhibitory synapses take their value, and `done`
//   goes high until the next `start`.
//
// Interface and timing
//   start: one-cycle pulse. Writes take ceil(N_PLASTIC/N_LANES) cycles after
//   the load cycle, then one inh_load cycle; done rises the cycle after.
//   wr_en[l] is low for lanes whose index is past N_PLASTIC-1.
//
// Paper vs. own choice
//   Random initial weights around (W_max - W_min)/2 from several configurable
//   LFSRs, and the strong inhibition assigned by the same unit, follow the
//   paper. The spread, R_BITS, the lane count and the seed derivation are this
//   design's choices.
module init_synapses
  import snn_pkg::*;
#(
  parameter int unsigned N_PLASTIC = 64,
  parameter int unsigned N_LANES   = 4,
  parameter int unsigned R_BITS    = 8,
  parameter int unsigned IDX_W     = $clog2(N_PLASTIC)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NB-1:0]    seed,
  input  logic [NB-1:0]    taps,
  output logic             wr_en   [N_LANES],
  output logic [IDX_W-1:0] wr_idx  [N_LANES],
  output fx_t              wr_data [N_LANES],
  output logic             inh_load,
  output logic             done
);

  localparam int unsigned N_GROUPS = (N_PLASTIC + N_LANES - 1) / N_LANES;
  localparam int unsigned G_W      = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1;

  typedef enum logic [1:0] {I_IDLE, I_LOAD, I_WRITE, I_INH} init_state_e;
  init_state_e st_q;
  logic [G_W-1:0] grp_q;
  logic [NB-1:0]  lfsr_q [N_LANES];
  logic           lfsr_load, lfsr_en;

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    config_lfsr #(.WIDTH(NB)) u_lfsr (
      .clk  (clk),
      .rst_n(rst_n),
      .load (lfsr_load),
      .seed (seed ^ (NB'(l) * NB'(32'h9E37_79B9))),
      .taps (taps),
      .en   (lfsr_en),
      .q    (lfsr_q[l])
    );
    always_comb begin
      wr_en[l]   = (st_q == I_WRITE) && ((int'(grp_q) * N_LANES + l) < N_PLASTIC);
      wr_idx[l]  = IDX_W'(int'(grp_q) * N_LANES + l);
      wr_data[l] = W_INIT_BASE + fx_t'({lfsr_q[l][R_BITS-1:0], {(29 - R_BITS){1'b0}}});
    end
  end

  assign lfsr_load = (st_q == I_LOAD);
  assign lfsr_en   = (st_q == I_WRITE);
  assign inh_load  = (st_q == I_INH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= I_IDLE;
      grp_q <= '0;
      done  <= 1'b0;
    end else begin
      unique case (st_q)
        I_IDLE:  if (start) begin st_q <= I_LOAD; done <= 1'b0; end
        I_LOAD:  begin st_q <= I_WRITE; grp_q <= '0; end
        I_WRITE: begin
          if (int'(grp_q) == N_GROUPS - 1) st_q <= I_INH;
          else grp_q <= grp_q + 1'b1;
        end
        I_INH:   begin st_q <= I_IDLE; done <= 1'b1; end
        default: st_q <= I_IDLE;
      endcase
    end
  end

endmodule
