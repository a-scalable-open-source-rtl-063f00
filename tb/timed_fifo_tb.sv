// timed_fifo_tb: pushes entries with future and past timestamps and checks
// that each value fires in exactly the cycle the timer reaches its stamp,
// in order, that overdue entries fire at once with `late`, and that the
// FIFO reports full at its depth.
module timed_fifo_tb;
  import qec_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst = 1, push = 0;
  time_t now = '0, push_time = '0;
  logic [31:0] push_data = '0, fire_data;
  logic full, empty, fire, late;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  always @(posedge clk) now <= rst ? '0 : now + 1;

  timed_fifo #(.DATA_W(32), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0d", what, now); end
  endtask

  // record releases
  time_t  fire_t [$];
  logic [31:0] fire_v [$];
  logic fire_l [$];
  always @(posedge clk) if (!rst && fire) begin
    fire_t.push_back(now); fire_v.push_back(fire_data); fire_l.push_back(late);
  end

  task automatic do_push(input time_t ts, input logic [31:0] v);
    push <= 1; push_time <= ts; push_data <= v;
    @(posedge clk); push <= 0;
  endtask

  initial begin
    #2000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    do_push(40, 32'hA);
    do_push(45, 32'hB);
    do_push(46, 32'hC);
    do_push(90, 32'hD);
    #0.1; check(full, "full at depth");
    do_push(95, 32'hE);        // dropped: full
    wait (now == 100);
    @(posedge clk);
    check(fire_t.size() == 4, "four releases");
    if (fire_t.size() == 4) begin
      check(fire_t[0] == 40 && fire_v[0] == 32'hA && !fire_l[0], "entry A on time");
      check(fire_t[1] == 45 && fire_v[1] == 32'hB && !fire_l[1], "entry B on time");
      check(fire_t[2] == 46 && fire_v[2] == 32'hC && !fire_l[2], "entry C back to back");
      check(fire_t[3] == 90 && fire_v[3] == 32'hD && !fire_l[3], "entry D on time");
    end
    check(empty, "empty after releases");
    // overdue entry
    fire_t.delete(); fire_v.delete(); fire_l.delete();
    do_push(now - 20, 32'h55);
    repeat (2) @(posedge clk);
    check(fire_t.size() == 1 && fire_v[0] == 32'h55 && fire_l[0], "overdue entry fires late");
    // entry at now+1 exactly
    fire_t.delete(); fire_v.delete(); fire_l.delete();
    do_push(now + 3, 32'h66);
    repeat (5) @(posedge clk);
    check(fire_t.size() == 1 && fire_v[0] == 32'h66 && !fire_l[0], "near entry on time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
