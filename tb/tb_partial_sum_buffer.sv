// tb_partial_sum_buffer: feeds segments of 1 to 4 groups of random tree sums
// (with idle cycles between beats) and checks that each segment's output is
// the sum of its groups, with the right tag, one cycle after the last beat.
module tb_partial_sum_buffer;
  localparam int DMEM = 64, IN_W = 9, ACC_W = 11, TAG_W = 7;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic [TAG_W-1:0] in_tag = '0, out_tag;
  logic [IN_W-1:0] tree_sum [DMEM];
  logic [ACC_W-1:0] out_enc [DMEM];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  partial_sum_buffer #(.DMEM(DMEM), .IN_W(IN_W), .ACC_W(ACC_W), .TAG_W(TAG_W)) dut (.*);

  initial begin
    int unsigned exp [DMEM];
    for (int d = 0; d < DMEM; d++) tree_sum[d] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int seg = 0; seg < 60; seg++) begin
      int ng; ng = 1 + seg % 4;
      for (int d = 0; d < DMEM; d++) exp[d] = 0;
      for (int g = 0; g < ng; g++) begin
        @(negedge clk);
        in_valid = 1; in_first = (g == 0); in_last = (g == ng - 1); in_tag = TAG_W'(seg);
        for (int d = 0; d < DMEM; d++) begin
          tree_sum[d] = IN_W'($urandom_range(310));
          exp[d] += tree_sum[d];
        end
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (out_valid != (g == ng - 1)) begin failures++; $display("FAIL out_valid seg %0d grp %0d", seg, g); end
        if ($urandom_range(1)) @(negedge clk);  // idle cycle
      end
      checks++;
      for (int d = 0; d < DMEM; d++)
        if (out_enc[d] != ACC_W'(exp[d]) || out_tag != TAG_W'(seg)) begin
          failures++; $display("FAIL seg %0d dim %0d: %0d vs %0d", seg, d, out_enc[d], exp[d]); break;
        end
    end
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
