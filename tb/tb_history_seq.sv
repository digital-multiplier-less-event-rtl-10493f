// tb_history_seq: checks the two-entry activity history: empty after reset,
// newest sample in hist[0], the older one shifted to hist[1], the oldest
// dropped on a third push, count saturating at 2, and clr emptying it.
`timescale 1ns/1ps
module tb_history_seq;
  localparam int N = 16, D = 2;
  logic clk = 0, rst_n = 0, clr = 0, push = 0;
  logic [N-1:0] vec = '0;
  logic [N-1:0] hist [D];
  logic [1:0] count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  history_seq #(.N(N), .DEPTH(D)) dut (.clk, .rst_n, .clr, .push, .vec, .hist, .count);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic do_push(logic [N-1:0] v);
    @(negedge clk); push = 1; vec = v;
    @(negedge clk); push = 0; vec = '0;
  endtask

  initial begin
    logic [N-1:0] a, b, c;
    a = 16'h4121; b = 16'h8212; c = 16'h4404;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(count == 0 && hist[0] == 0 && hist[1] == 0, "empty after reset");
    do_push(a);
    check(count == 1 && hist[0] == a, "first sample stored");
    repeat (3) @(negedge clk);
    check(count == 1 && hist[0] == a, "holds without push");
    do_push(b);
    check(count == 2 && hist[0] == b && hist[1] == a, "second sample, first shifted");
    do_push(c);
    check(count == 2 && hist[0] == c && hist[1] == b, "third push drops the oldest");
    @(negedge clk); clr = 1; push = 1; vec = a;
    @(negedge clk); clr = 0; push = 0;
    check(count == 0 && hist[0] == 0 && hist[1] == 0, "clr empties (wins over push)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
