// tb_config_lfsr: checks the configurable LFSR against a software Galois
// model for two seeds and polynomials, the zero-seed guard, hold when en=0,
// and the full period 2^16-1 of a 16-bit maximal polynomial (x^16 + x^14 +
// x^13 + x^11 + 1, tap mask 0xB400).
`timescale 1ns/1ps
module tb_config_lfsr;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [W-1:0] seed = '0, taps = '0, q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  config_lfsr #(.WIDTH(W)) dut (.clk, .rst_n, .load, .seed, .taps, .en, .q);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) q=%h", what, $time, q); end
  endtask

  function automatic logic [W-1:0] model(logic [W-1:0] r, logic [W-1:0] t);
    return r[0] ? ((r >> 1) ^ t) : (r >> 1);
  endfunction

  task automatic run_model(logic [W-1:0] s, logic [W-1:0] t, int steps);
    logic [W-1:0] m;
    @(negedge clk); load = 1; seed = s; taps = t;
    @(negedge clk); load = 0;
    m = (s == 0) ? 1 : s;
    check(q == m, "seed loaded");
    en = 1;
    for (int i = 0; i < steps; i++) begin
      @(negedge clk);
      m = model(m, t);
      check(q == m, "sequence matches model");
    end
    en = 0;
    @(negedge clk);
    check(q == m, "holds when en = 0");
  endtask

  initial begin
    int period;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_model(16'hACE1, 16'hB400, 40);
    run_model(16'h1234, 16'h8016, 40);
    run_model(16'h0000, 16'hB400, 5);
    // period of a maximal polynomial
    @(negedge clk); load = 1; seed = 16'h0001; taps = 16'hB400;
    @(negedge clk); load = 0; en = 1;
    period = 0;
    do begin @(negedge clk); period++; end while (q != 16'h0001 && period < 70000);
    en = 0;
    check(period == 65535, "maximal period 2^16-1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
