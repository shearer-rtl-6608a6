// tb_id_address_controller: checks every (segment, group) of the default
// 40 x 2 schedule maps to a distinct row in segment-major order.
module tb_id_address_controller;
  logic [5:0] seg;
  logic [0:0] grp;
  logic [8:0] row;
  bit used [512];
  int checks = 0, failures = 0;

  id_address_controller dut (.*);

  initial begin
    int expect_row;
    expect_row = 0;
    for (int s = 0; s < 40; s++)
      for (int g = 0; g < 2; g++) begin
        seg = 6'(s); grp = 1'(g); #1;
        checks++;
        if (row != 9'(expect_row) || used[row]) begin
          failures++; $display("FAIL seg %0d grp %0d row %0d", s, g, row);
        end
        used[row] = 1;
        expect_row++;
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
