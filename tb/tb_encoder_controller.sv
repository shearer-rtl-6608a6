// tb_encoder_controller: runs three samples, the second offered back to back,
// the third after a pause, and checks that each takes exactly 40 x 2 = 80
// issue cycles in segment-major order with correct first/last flags, that the
// back-to-back sample is accepted in the last issue cycle, and that nothing
// is issued while idle.
module tb_encoder_controller;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic in_ready, accept, issue, first, last, sample_last;
  logic [5:0] seg;
  logic [0:0] grp;
  int checks = 0, failures = 0;
  int n_issue = 0, exp_seg = 0, exp_grp = 0, n_accept = 0, n_b2b = 0, n_idle_issue = 0;

  always #5 clk = ~clk;

  encoder_controller dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (accept) begin
      n_accept++;
      if (issue) n_b2b++;
    end
    if (issue) begin
      checks++;
      if (seg != 6'(exp_seg) || grp != 1'(exp_grp) || first != (exp_grp == 0) || last != (exp_grp == 1)
          || sample_last != (exp_seg == 39 && exp_grp == 1)) begin
        failures++; $display("FAIL issue %0d: seg %0d grp %0d", n_issue, seg, grp);
      end
      n_issue++;
      if (exp_grp == 1) begin exp_grp = 0; exp_seg = (exp_seg + 1) % 40; end
      else exp_grp = 1;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); in_valid = 1;
    @(negedge clk);
    // keep offering: the second sample must be taken in the last issue cycle
    wait (n_accept == 2);
    @(negedge clk); in_valid = 0;
    repeat (100) @(negedge clk);
    checks++;
    if (n_issue != 160) begin failures++; $display("FAIL issues after two samples: %0d", n_issue); end
    checks++;
    if (issue || !in_ready) begin failures++; $display("FAIL not idle"); end
    in_valid = 1;
    @(negedge clk); in_valid = 0;
    repeat (90) @(negedge clk);
    checks++;
    if (n_issue != 240) begin failures++; $display("FAIL issues after three samples: %0d", n_issue); end
    checks++;
    if (n_b2b != 1) begin failures++; $display("FAIL back-to-back acceptances: %0d", n_b2b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
