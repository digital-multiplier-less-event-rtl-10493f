// tb_behavior_mode: starts the unit on triplet A1X and checks the drive
// (V_input on the A1 and X neurons only, nothing when disabled), then feeds
// spike patterns: a move spike gives one move pulse, a history push whose
// sample holds the latest spike vector of each layer, and the complementary
// triplet A2Y; a later dig gives a dig pulse with its own sample; dig and
// move in the same cycle count as a dig.
`timescale 1ns/1ps
module tb_behavior_mode;
  import snn_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, en = 0, start = 0;
  logic [5:0] triplet = '0;
  logic [N-1:0] spikes = '0;
  fx_t vin [N];
  logic push, dig, move;
  logic [N-1:0] vec;
  logic [5:0] cur_triplet;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  behavior_mode dut (.clk, .rst_n, .en, .start, .triplet, .spikes, .vin, .push, .vec, .dig, .move, .cur_triplet);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) vec=%b", what, $time, vec); end
  endtask

  task automatic spike_once(logic [N-1:0] s);
    @(negedge clk); spikes = s;
    @(negedge clk); spikes = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; triplet = 6'b010001;      // A1X
    @(negedge clk); start = 0;
    check(vin[0] == 0, "no drive while disabled");
    en = 1;
    #1;
    for (int i = 0; i < N; i++)
      check(vin[i] == ((i == 0 || i == 4) ? V_INPUT_DEF : 0), "V_input on A1 and X only");
    spike_once(16'h0011);          // sensory
    spike_once(16'h0100);          // hidden 8
    spike_once(16'h0200);          // hidden 9 (latest)
    check(!push && !dig && !move, "no action yet");
    @(negedge clk); spikes = 16'h8000;    // move neuron
    @(negedge clk); spikes = '0;
    check(move && !dig && push, "move pulse and push");
    check(vec == 16'h8211, "sample: latest of each layer");
    check(cur_triplet == 6'b100100, "A1X -> A2Y after move");
    #1;
    check(vin[2] == V_INPUT_DEF && vin[5] == V_INPUT_DEF && vin[0] == 0, "drive follows new triplet");
    @(negedge clk);
    check(!move && !push, "one-cycle pulses");
    spike_once(16'h0024);          // sensory A2, Y
    spike_once(16'h0400);          // hidden 10
    @(negedge clk); spikes = 16'h4000;    // dig neuron
    @(negedge clk); spikes = '0;
    check(dig && !move && push, "dig pulse and push");
    check(vec == 16'h4424, "second sample holds only its own step");
    check(cur_triplet == 6'b100100, "dig keeps the triplet");
    @(negedge clk); spikes = 16'hC000;
    @(negedge clk); spikes = '0;
    check(dig && !move, "dig wins a tie");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
