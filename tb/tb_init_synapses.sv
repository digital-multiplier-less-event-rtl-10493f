// tb_init_synapses: checks the weight initialiser at its default size
// (64 plastic synapses, 4 lanes). Every synapse index must be written
// exactly once, with the value 0.375 + r*2^-(2+R_BITS) where r comes from a
// software model of that lane's LFSR; all values lie in [0.375, 0.625);
// inh_load pulses once, after the last write; done rises 18 cycles after
// start (1 load + 16 write + 1 inhibitory cycle) and the unit can be
// restarted.
`timescale 1ns/1ps
module tb_init_synapses;
  import snn_pkg::*;
  localparam int NP = 64, NL = 4, RB = 8, IW = 6;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] seed = 32'h1357_9BDF, taps = 32'h8020_0003;
  logic wr_en [NL];
  logic [IW-1:0] wr_idx [NL];
  fx_t wr_data [NL];
  logic inh_load, done;
  int checks = 0, failures = 0;
  int written [NP];
  logic [31:0] lane_m [NL];
  int n_inh, cyc, last_wr_cyc, inh_cyc;

  always #5 clk = ~clk;

  init_synapses #(.N_PLASTIC(NP), .N_LANES(NL), .R_BITS(RB)) dut (
    .clk, .rst_n, .start, .seed, .taps, .wr_en, .wr_idx, .wr_data, .inh_load, .done);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic run_init();
    for (int k = 0; k < NP; k++) written[k] = 0;
    for (int l = 0; l < NL; l++) begin
      lane_m[l] = seed ^ (32'(l) * 32'h9E37_79B9);
      if (lane_m[l] == 0) lane_m[l] = 1;
    end
    n_inh = 0; cyc = 0; last_wr_cyc = -1; inh_cyc = -1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 100) begin
      for (int l = 0; l < NL; l++) if (wr_en[l]) begin
        fx_t expv;
        expv = 32'sh3000_0000 + fx_t'({lane_m[l][RB-1:0], 21'b0});
        written[wr_idx[l]]++;
        check(wr_data[l] == expv, "weight matches LFSR model");
        check(wr_data[l] >= 32'sh3000_0000 && wr_data[l] < 32'sh5000_0000, "weight in [0.375, 0.625)");
        last_wr_cyc = cyc;
      end
      if (wr_en[0]) for (int l = 0; l < NL; l++)
        lane_m[l] = lane_m[l][0] ? ((lane_m[l] >> 1) ^ taps) : (lane_m[l] >> 1);
      if (inh_load) begin n_inh++; inh_cyc = cyc; end
      @(negedge clk); cyc++;
    end
    for (int k = 0; k < NP; k++) check(written[k] == 1, "each synapse written once");
    check(n_inh == 1 && inh_cyc > last_wr_cyc, "one inh_load after the writes");
    check(done && cyc == 18, "done 18 cycles after start");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_init();
    seed = 32'h0BAD_F00D;
    run_init();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
