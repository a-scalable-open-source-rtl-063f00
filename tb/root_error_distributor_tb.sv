// root_error_distributor_tb: the decoder model offers random correction
// vectors; each leaf link accepts at random times. Checks that every enabled
// leaf gets exactly one error message per decode with its own slice of the
// vector, its node id and the round number, that disabled leaves get
// nothing, and that the decoder is held off until all links have drained.
module root_error_distributor_tb;
  import qec_pkg::*;
  localparam int NL = 4, NC = 14;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic [NL-1:0] leaf_mask = 4'b1101, tx_valid, tx_ready = '0;
  logic err_valid = 0, err_ready;
  logic [NL*NC-1:0] err_vec = '0;
  logic [7:0] err_round = '0;
  msg_t tx_msg [NL];
  logic [NL*NC-1:0] sent_v [$];
  logic [7:0]       sent_r [$];
  int got [NL];
  int checks = 0, failures = 0, n_sent = 0;

  root_error_distributor #(.N_LEAF(NL), .N_CORES(NC)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (err_valid && err_ready) begin sent_v.push_back(err_vec); sent_r.push_back(err_round); n_sent++; end
    for (int l = 0; l < NL; l++)
      if (tx_valid[l] && tx_ready[l]) begin
        check(leaf_mask[l], $sformatf("message to disabled leaf %0d", l));
        check(got[l] < sent_v.size(), "message without a decode");
        if (got[l] < sent_v.size()) begin
          check(tx_msg[l].mtype == MSG_ERROR && tx_msg[l].node == 4'(l), "header");
          check(tx_msg[l].payload == 48'(sent_v[got[l]][l*NC +: NC]), $sformatf("leaf %0d slice", l));
          check(tx_msg[l].round == sent_r[got[l]], "round");
        end
        got[l]++;
      end
    if (err_ready) check(tx_valid == '0, "ready only when links are drained");
  end

  always @(negedge clk) begin
    tx_ready <= NL'($urandom);
    if (!rst && !(err_valid && err_ready)) begin
      err_valid <= ($urandom_range(2, 0) == 0) && n_sent < 100;
      err_vec   <= {$urandom, $urandom};
      err_round <= 8'($urandom);
    end else if (err_valid && err_ready) err_valid <= 0;
  end

  initial begin
    #40000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) got[l] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (n_sent == 100);
    repeat (50) @(negedge clk);
    for (int l = 0; l < NL; l++)
      check(got[l] == (leaf_mask[l] ? 100 : 0), $sformatf("leaf %0d got %0d", l, got[l]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
