// global_timer_tb: checks that the timer counts one per cycle from reset and
// that a PTP step adds its signed offset exactly once, in the next cycle.
module global_timer_tb;
  import qec_pkg::*;
  logic clk = 0, rst = 1, adj_valid = 0;
  time_t adj_offset = '0, t;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  global_timer dut (.clk, .rst, .adj_valid, .adj_offset, .time_o (t));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    time_t t0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #0.1;
    check(t == 1, "first count after reset");
    repeat (10) @(posedge clk); #0.1;
    check(t == 11, "eleven cycles");
    t0 = t;
    adj_valid <= 1; adj_offset <= time_t'(100);
    @(posedge clk); #0.1; adj_valid <= 0;
    check(t == t0 + 101, "positive step");
    t0 = t;
    adj_valid <= 1; adj_offset <= -time_t'(40);
    @(posedge clk); #0.1; adj_valid <= 0;
    check(t == t0 + 1 - 40, "negative step");
    t0 = t;
    repeat (5) @(posedge clk); #0.1;
    check(t == t0 + 5, "counting resumes");
    rst <= 1; @(posedge clk); #0.1;
    check(t == 0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
