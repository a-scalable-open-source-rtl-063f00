// async_fifo_tb: writer at 500 MHz and reader at 156.25 MHz (and the other
// way round), both pushing/popping at random. Checks that every word comes
// out once and in order, that full/empty are honoured (no write while full
// is accepted, nothing read while empty), and that the FIFO fills up.
module async_fifo_tb;
  localparam int WD = 16, DP = 8;
  logic fclk = 0, sclk = 0, frst = 1, srst = 1;
  always #1   fclk = ~fclk;
  always #3.2 sclk = ~sclk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // A: fast writer -> slow reader; B: slow writer -> fast reader
  logic a_winc = 0, a_rinc = 0, a_full, a_empty, b_winc = 0, b_rinc = 0, b_full, b_empty;
  logic [WD-1:0] a_wdata = '0, a_rdata, b_wdata = '0, b_rdata;
  logic [WD-1:0] a_q [$], b_q [$];
  int a_n = 0, b_n = 0, a_fullseen = 0, b_fullseen = 0;
  int phase = 0;  // 0: random, 1: reader stalled (fill up), 2: drain

  async_fifo #(.WIDTH(WD), .DEPTH(DP)) a (
    .wclk (fclk), .wrst (frst), .winc (a_winc), .wdata (a_wdata), .wfull (a_full),
    .rclk (sclk), .rrst (srst), .rinc (a_rinc), .rdata (a_rdata), .rempty (a_empty));
  async_fifo #(.WIDTH(WD), .DEPTH(DP)) b (
    .wclk (sclk), .wrst (srst), .winc (b_winc), .wdata (b_wdata), .wfull (b_full),
    .rclk (fclk), .rrst (frst), .rinc (b_rinc), .rdata (b_rdata), .rempty (b_empty));

  // writers: only push when not full; record what was written
  always @(posedge fclk) if (!frst) begin
    if (a_winc) a_q.push_back(a_wdata);
    if (a_full) a_fullseen++;
    if (b_rinc) begin
      check(b_q.size() > 0 && b_rdata == b_q[0], $sformatf("B data %h", b_rdata));
      if (b_q.size() > 0) void'(b_q.pop_front());
      b_n++;
    end
  end
  always @(posedge sclk) if (!srst) begin
    if (b_winc) b_q.push_back(b_wdata);
    if (b_full) b_fullseen++;
    if (a_rinc) begin
      check(a_q.size() > 0 && a_rdata == a_q[0], $sformatf("A data %h", a_rdata));
      if (a_q.size() > 0) void'(a_q.pop_front());
      a_n++;
    end
  end
  always @(negedge fclk) begin
    a_winc  = !frst && !a_full && phase != 2 && $urandom_range(1, 0) == 1;
    a_wdata = WD'($urandom);
    b_rinc  = !frst && !b_empty && phase != 1 && $urandom_range(1, 0) == 1;
  end
  always @(negedge sclk) begin
    b_winc  = !srst && !b_full && phase != 2 && $urandom_range(1, 0) == 1;
    b_wdata = WD'($urandom);
    a_rinc  = !srst && !a_empty && phase != 1 && $urandom_range(3, 0) != 0;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge sclk);
    frst = 0; srst = 0;
    check(a_empty && b_empty && !a_full && !b_full, "empty after reset");
    repeat (2000) @(posedge sclk);
    phase = 1;
    repeat (100) @(posedge sclk);
    check(a_full && b_full, "both fill up when not read");
    check(a_q.size() == DP && b_q.size() == DP, $sformatf("exactly DEPTH words held (%0d, %0d)", a_q.size(), b_q.size()));
    phase = 2;
    repeat (200) @(posedge sclk);
    check(a_empty && b_empty && a_q.size() == 0 && b_q.size() == 0, "drained");
    check(a_n > 500 && b_n > 500, $sformatf("traffic %0d %0d", a_n, b_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
