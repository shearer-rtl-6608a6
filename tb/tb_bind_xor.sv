// tb_bind_xor: random level bits, ID windows and slot masks; checks that
// dimension d of slot j is level[j][d] XOR window[j+d] for valid slots and 0
// for masked ones, over all 64 x 310 positions.
module tb_bind_xor;
  localparam int F = 310, DMEM = 64;
  logic [DMEM-1:0] level_bits [F];
  logic [DMEM+F-2:0] id_window;
  logic [F-1:0] slot_valid;
  logic [F-1:0] bound [DMEM];
  int checks = 0, failures = 0;

  bind_xor dut (.*);

  initial begin
    for (int it = 0; it < 20; it++) begin
      int bad;
      for (int j = 0; j < F; j++) level_bits[j] = {$urandom, $urandom};
      for (int i = 0; i < DMEM + F - 1; i++) id_window[i] = 1'($urandom);
      for (int j = 0; j < F; j++) slot_valid[j] = (it % 2 == 0) ? 1'b1 : (j < F - 3 * (it % 4));
      #1;
      bad = 0;
      for (int d = 0; d < DMEM; d++)
        for (int j = 0; j < F; j++)
          if (bound[d][j] != (slot_valid[j] ? level_bits[j][d] ^ id_window[j + d] : 1'b0)) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL iteration %0d: %0d bits", it, bad); end
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
