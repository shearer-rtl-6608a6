// tb_level_bram_group: loads 16 random level hypervectors of 2560 bits, then
// reads random (segment, level0, level1) triples and checks that both ports
// return bits seg*64 .. seg*64+63 of the right level hypervectors one cycle
// after the read.
module tb_level_bram_group;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [5:0] seg = '0;
  logic [3:0] level0 = '0, level1 = '0;
  logic [63:0] data0, data1, wr_data = '0;
  logic [9:0] wr_row = '0;
  logic [2559:0] lhv [16];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  level_bram_group dut (.*);

  initial begin
    for (int l = 0; l < 16; l++)
      for (int w = 0; w < 80; w++) lhv[l][w*32 +: 32] = $urandom;
    for (int l = 0; l < 16; l++)
      for (int s = 0; s < 40; s++) begin
        @(negedge clk); wr_en = 1; wr_row = 10'(l * 40 + s); wr_data = lhv[l][s*64 +: 64];
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 500; i++) begin
      int s, a, b;
      s = $urandom_range(39); a = $urandom_range(15); b = $urandom_range(15);
      @(negedge clk); rd_en = 1; seg = 6'(s); level0 = 4'(a); level1 = 4'(b);
      @(negedge clk); rd_en = 0; seg = 6'($urandom_range(39)); level0 = 4'($urandom); level1 = 4'($urandom);
      checks++;
      if (data0 != lhv[a][s*64 +: 64] || data1 != lhv[b][s*64 +: 64]) begin
        failures++; $display("FAIL seg %0d levels %0d %0d", s, a, b);
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
