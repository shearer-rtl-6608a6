// tb_bram_512x64: writes random rows through port A, reads them back through
// both ports and checks the data, the one-cycle read latency, and that a port
// that is not enabled holds its last output.
module tb_bram_512x64;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0;
  logic [8:0] a_addr = '0, b_addr = '0;
  logic [63:0] a_wdata = '0, a_rdata, b_rdata;
  logic [63:0] model [512];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bram_512x64 dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int r = 0; r < 512; r++) begin
      model[r] = {$urandom, $urandom};
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 9'(r); a_wdata = model[r];
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int i = 0; i < 400; i++) begin
      int ra, rb;
      ra = $urandom_range(511); rb = $urandom_range(511);
      @(negedge clk); a_en = 1; b_en = 1; a_addr = 9'(ra); b_addr = 9'(rb);
      @(posedge clk); #1;
      chk(a_rdata == model[ra], $sformatf("port A row %0d", ra));
      chk(b_rdata == model[rb], $sformatf("port B row %0d", rb));
      // disabled ports hold their outputs
      @(negedge clk); a_en = 0; b_en = 0; a_addr = 9'(ra ^ 1); b_addr = 9'(rb ^ 1);
      @(posedge clk); #1;
      chk(a_rdata == model[ra] && b_rdata == model[rb], "hold when disabled");
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
