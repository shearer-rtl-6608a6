// tb_level_to_address: for every (level, segment) of the default 16 x 40
// configuration, checks that the address falls in one of the two BRAMs of the
// group, that no two pairs share an address, and that the address is the
// row level*40 + segment counted over the BRAMs in order. A second instance
// with 32 segments (exactly 512 rows, one BRAM per group, the digit build)
// checks the case where the row count equals the BRAM depth.
module tb_level_to_address;
  logic [3:0] level;
  logic [5:0] seg;
  logic [0:0] bram_sel;
  logic [8:0] row;
  bit used [2][512];
  int checks = 0, failures = 0;

  level_to_address dut (.*);

  logic [5:0] seg2;
  logic [0:0] bram_sel2;
  logic [8:0] row2;
  level_to_address #(.SEGS(32), .GROUP_SIZE(1)) dut2 (.level, .seg(seg2), .bram_sel(bram_sel2), .row(row2));

  initial begin
    for (int l = 0; l < 16; l++)
      for (int s = 0; s < 40; s++) begin
        int lin;
        level = 4'(l); seg = 6'(s); #1;
        lin = l * 40 + s;
        checks++;
        if (bram_sel != 1'(lin / 512) || row != 9'(lin % 512) || used[bram_sel][row]) begin
          failures++; $display("FAIL level %0d seg %0d -> %0d/%0d", l, s, bram_sel, row);
        end
        used[bram_sel][row] = 1;
        if (s < 32) begin
          seg2 = 6'(s); #1;
          checks++;
          if (bram_sel2 != 0 || row2 != 9'(l * 32 + s)) begin
            failures++; $display("FAIL 32-segment level %0d seg %0d -> %0d/%0d", l, s, bram_sel2, row2);
          end
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
