// tb_plastic_synapse: checks the shift-only STDP rule against a cycle model.
// Cases: no change without E_learning; pre before post with learning gives
// LTP of (W_MAX - W) * 2^-10 in every cycle after both times are stored;
// post before pre gives LTD of W * 2^-11 per cycle; simultaneous spikes and
// pairs further apart than DT_MAX give no change; ts_clr forgets stored
// times; an initial-weight write overrides learning. The expected weight is
// recomputed in the testbench with 64-bit integer arithmetic every cycle.
`timescale 1ns/1ps
module tb_plastic_synapse;
  import snn_pkg::*;
  localparam int TS_W = 16, DT_MAX = 20;
  logic clk = 0, rst_n = 0, pre = 0, post = 0, e_learning = 0, ts_clr = 0, wr_en = 0;
  logic [TS_W-1:0] now = '0;
  fx_t wr_data = '0, w;
  logic ltp, ltd;
  int checks = 0, failures = 0, n_ltp = 0, n_ltd = 0;

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1'b1;
  always @(posedge clk) begin n_ltp += ltp; n_ltd += ltd; end

  plastic_synapse #(.TS_W(TS_W), .DT_MAX(DT_MAX)) dut (
    .clk, .rst_n, .pre, .post, .now, .e_learning, .ts_clr, .wr_en, .wr_data, .w, .ltp, .ltd);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t) w=%h", what, $time, w); end
  endtask

  task automatic write_w(fx_t v);
    @(negedge clk); wr_en = 1; wr_data = v;
    @(negedge clk); wr_en = 0;
    check(w == v, "initial weight write");
  endtask

  task automatic pulse_pre();  @(negedge clk); pre = 1;  @(negedge clk); pre = 0;  endtask
  task automatic pulse_post(); @(negedge clk); post = 1; @(negedge clk); post = 0; endtask
  task automatic clear_ts();   @(negedge clk); ts_clr = 1; @(negedge clk); ts_clr = 0; endtask

  // one learning cycle of the model
  function automatic longint step_model(longint wv, int sgn);
    longint wmax = 64'h7FFF_FFFF;
    if (sgn > 0) wv = wv + ((wmax - wv) >>> 10);
    else if (sgn < 0) wv = wv - (wv >>> 11);
    if (wv > wmax) wv = wmax;
    if (wv < 0) wv = 0;
    return wv;
  endfunction

  initial begin
    longint m;
    repeat (2) @(negedge clk);
    rst_n = 1;
    write_w(32'sh4000_0000);
    // 1: pairing without learning
    pulse_pre(); repeat (3) @(negedge clk); pulse_post(); repeat (5) @(negedge clk);
    check(w == 32'sh4000_0000, "no change without E_learning");
    // 2: LTP, pre then post with learning on
    clear_ts();
    e_learning = 1;
    pulse_pre(); repeat (3) @(negedge clk);
    @(negedge clk); post = 1;
    @(negedge clk); post = 0;                 // times stored at this edge
    m = 64'h4000_0000;
    for (int c = 0; c < 10; c++) begin
      @(negedge clk);
      m = step_model(m, +1);
      check(longint'(w) == m, "LTP per cycle = (W_MAX-W)>>10");
    end
    check(w > 32'sh4000_0000, "weight potentiated");
    e_learning = 0;
    // 3: LTD, post then pre
    write_w(32'sh4000_0000);
    clear_ts();
    e_learning = 1;
    pulse_post(); repeat (2) @(negedge clk);
    @(negedge clk); pre = 1;
    @(negedge clk); pre = 0;
    m = 64'h4000_0000;
    for (int c = 0; c < 10; c++) begin
      @(negedge clk);
      m = step_model(m, -1);
      check(longint'(w) == m, "LTD per cycle = W>>11");
    end
    e_learning = 0;
    // 4: simultaneous spikes: dt = 0
    write_w(32'sh4000_0000);
    clear_ts();
    e_learning = 1;
    @(negedge clk); pre = 1; post = 1;
    @(negedge clk); pre = 0; post = 0;
    repeat (5) @(negedge clk);
    check(w == 32'sh4000_0000, "dt = 0 leaves W");
    // 5: outside the window
    clear_ts();
    pulse_pre(); repeat (DT_MAX + 3) @(negedge clk); pulse_post(); repeat (5) @(negedge clk);
    check(w == 32'sh4000_0000, "dt > DT_MAX leaves W");
    // 6: ts_clr forgets: post only after clear -> no pair
    clear_ts(); pulse_pre(); clear_ts(); pulse_post(); repeat (5) @(negedge clk);
    check(w == 32'sh4000_0000, "ts_clr forgets stored times");
    // 7: saturation near W_MAX stays bounded
    write_w(32'sh7FFF_FF00);
    clear_ts();
    pulse_pre(); pulse_post(); repeat (50) @(negedge clk);
    check(w <= 32'sh7FFF_FFFF && w >= 32'sh7FFF_FF00, "LTP bounded by W_MAX");
    e_learning = 0;
    check(n_ltp > 0 && n_ltd > 0, "ltp and ltd pulses seen");
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
