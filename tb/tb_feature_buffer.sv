// tb_feature_buffer: loads random 617-feature samples and checks that group 0
// serves features 0..309, group 1 features 310..616 with the last three slots
// invalid and at level 0, and that the held sample does not change until the
// next load.
module tb_feature_buffer;
  localparam int DIV = 617, F = 310;
  logic clk = 0, load = 0;
  logic [3:0] sample [DIV];
  logic [0:0] grp = '0;
  logic [3:0] slot_level [F];
  logic [F-1:0] slot_valid;
  logic [3:0] held [DIV];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  feature_buffer dut (.*);

  initial begin
    for (int it = 0; it < 10; it++) begin
      for (int k = 0; k < DIV; k++) sample[k] = 4'($urandom);
      held = sample;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int k = 0; k < DIV; k++) sample[k] = 4'($urandom);  // must not be taken
      for (int g = 0; g < 2; g++) begin
        int bad; bad = 0;
        grp = 1'(g); #1;
        for (int j = 0; j < F; j++) begin
          int k; k = g * F + j;
          if (k < DIV) begin
            if (!slot_valid[j] || slot_level[j] != held[k]) bad++;
          end else if (slot_valid[j] || slot_level[j] != 0) bad++;
        end
        checks++;
        if (bad) begin failures++; $display("FAIL sample %0d group %0d: %0d slots", it, g, bad); end
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
