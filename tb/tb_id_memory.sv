// tb_id_memory: fills 80 rows of the 373-bit seed-ID memory with windows of
// a random 2560-bit seed (row seg*2+grp holds seed bits from seg*64+grp*310
// on, wrapping), reads them back in random order and checks every bit and the
// one-cycle read latency.
module tb_id_memory;
  localparam int IDW = 64 + 310 - 1;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [8:0] rd_row = '0, wr_row = '0;
  logic [IDW-1:0] rd_data, wr_data = '0;
  logic [2559:0] seed;
  logic [IDW-1:0] win [80];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  id_memory dut (.*);

  initial begin
    for (int w = 0; w < 80; w++) seed[w*32 +: 32] = $urandom;
    for (int s = 0; s < 40; s++)
      for (int g = 0; g < 2; g++)
        for (int i = 0; i < IDW; i++) win[s*2+g][i] = seed[(s*64 + g*310 + i) % 2560];
    for (int r = 0; r < 80; r++) begin
      @(negedge clk); wr_en = 1; wr_row = 9'(r); wr_data = win[r];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      int r; r = $urandom_range(79);
      @(negedge clk); rd_en = 1; rd_row = 9'(r);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != win[r]) begin failures++; $display("FAIL row %0d", r); end
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
