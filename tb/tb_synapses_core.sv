// tb_synapses_core: loads distinct initial weights through the write lanes,
// loads the inhibitory value and checks the whole 16x16 weight matrix
// (plastic weight k at its pre/post position, inhibitory value at the 58
// lateral positions, zero elsewhere). Then pairs sensory neuron 0 with
// hidden neuron 6 (pre first) and hidden 7 with motor 15 (post first) under
// E_learning and checks that exactly those two weights move, in the right
// direction, with the right ltp/ltd bits.
`timescale 1ns/1ps
module tb_synapses_core;
  import snn_pkg::*;
  localparam int N = 16, NP = 64, NL = 4;
  logic clk = 0, rst_n = 0, e_learning = 0, ts_clr = 0, inh_load = 0;
  logic [N-1:0] spikes = '0;
  logic [15:0] now = '0;
  logic wr_en [NL];
  logic [5:0] wr_idx [NL];
  fx_t wr_data [NL];
  fx_t inh_value = 32'shC000_0000;
  fx_t w [N][N];
  logic [NP-1:0] ltp, ltd, ltp_seen = '0, ltd_seen = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin now <= now + 1'b1; ltp_seen <= ltp_seen | ltp; ltd_seen <= ltd_seen | ltd; end

  synapses_core dut (.clk, .rst_n, .spikes, .now, .e_learning, .ts_clr,
    .wr_en, .wr_idx, .wr_data, .inh_load, .inh_value, .w, .ltp, .ltd);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  function automatic int lay(int i);
    return (i <= 5) ? 0 : (i <= 13) ? 1 : 2;
  endfunction
  function automatic int kidx(int i, int j);
    return (i < 6) ? i * 8 + (j - 6) : 48 + (i - 6) * 2 + (j - 14);
  endfunction
  function automatic fx_t initv(int k);
    return 32'sh3000_0000 + fx_t'(k << 20);
  endfunction

  initial begin
    fx_t w06, w7f;
    for (int l = 0; l < NL; l++) begin wr_en[l] = 0; wr_idx[l] = '0; wr_data[l] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < NP / NL; g++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin wr_en[l] = 1; wr_idx[l] = 6'(g * NL + l); wr_data[l] = initv(g * NL + l); end
    end
    @(negedge clk);
    for (int l = 0; l < NL; l++) wr_en[l] = 0;
    inh_load = 1;
    @(negedge clk); inh_load = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if (lay(j) == lay(i) + 1)                          check(w[i][j] == initv(kidx(i, j)), "plastic weight placed");
      else if (i != j && lay(i) == lay(j) && lay(i) > 0) check(w[i][j] == inh_value, "inhibitory weight loaded");
      else                                               check(w[i][j] == 0, "no synapse reads zero");
    end
    w06 = w[0][6]; w7f = w[7][15];
    // learning
    e_learning = 1;
    @(negedge clk); ts_clr = 1; @(negedge clk); ts_clr = 0;
    @(negedge clk); spikes[0] = 1; spikes[15] = 1;
    @(negedge clk); spikes = '0;
    repeat (3) @(negedge clk);
    @(negedge clk); spikes[6] = 1; spikes[7] = 1;
    @(negedge clk); spikes = '0;
    repeat (5) @(negedge clk);
    e_learning = 0;
    @(negedge clk);
    check(w[0][6] > w06, "pre-before-post potentiates 0->6");
    check(w[7][15] < w7f, "post-before-pre depresses 7->15");
    check(ltp_seen[kidx(0, 6)] && ltd_seen[kidx(7, 15)], "ltp/ltd bits of those synapses");
    // every other plastic synapse that saw one of these spikes pairs too; those
    // with no spike at either end must be unchanged
    check(w[1][8] == initv(kidx(1, 8)) && w[9][14] == initv(kidx(9, 14)), "unpaired synapses unchanged");
    check(w[6][7] == inh_value, "inhibitory weight not plastic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
