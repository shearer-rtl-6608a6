// tb_shearer_workloads: the benchmark configurations of the encoder other
// than the default one, at their full sizes, each built with the parameters
// it needs (MAJ trees, 64-bit BRAM words, 16 levels):
//   activity DIV 561, DHV 3072, F 281: 2 BRAMs/group, 48 x 2 =  96 cycles
//   face     DIV 608, DHV 6144, F 203: 3 BRAMs/group, 96 x 3 = 288 cycles
//   digit    DIV 784, DHV 2048, F 392: 1 BRAM/group,  32 x 2 =  64 cycles
// (the speech configuration is the default build, run by tb_shearer_full).
// F is the largest group of features the 445 BRAMs allow, split evenly over
// the cycles. Each encoder encodes two random samples back to back; every
// dimension is checked against the reference model, and the sample period
// (the distance between the two acceptances) must equal the cycle count above.
module tb_shearer_workloads;
  import hd_pkg::*, tb_hd_ref_pkg::*;
  localparam int NE = 3;
  localparam int PERIOD [NE] = '{96, 288, 64};
  localparam string NAME [NE] = '{"activity", "face", "digit"};
  logic clk = 0;
  bit done [NE];
  int c [NE], f [NE], b2b [NE], msk [NE], period [NE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_shearer_env #(.DHV(3072), .DIV(561), .F(281), .DMEM(64), .NSAMPLES(2))
    e0 (.clk, .done(done[0]), .checks(c[0]), .failures(f[0]), .n_b2b(b2b[0]), .n_masked_groups(msk[0]), .period(period[0]));
  tb_shearer_env #(.DHV(6144), .DIV(608), .F(203), .DMEM(64), .NSAMPLES(2))
    e1 (.clk, .done(done[1]), .checks(c[1]), .failures(f[1]), .n_b2b(b2b[1]), .n_masked_groups(msk[1]), .period(period[1]));
  tb_shearer_env #(.DHV(2048), .DIV(784), .F(392), .DMEM(64), .NSAMPLES(2))
    e2 (.clk, .done(done[2]), .checks(c[2]), .failures(f[2]), .n_b2b(b2b[2]), .n_masked_groups(msk[2]), .period(period[2]));

  initial begin
    wait (done[0] && done[1] && done[2]);
    for (int i = 0; i < NE; i++) begin
      checks += c[i]; failures += f[i];
      checks++;
      $display("%-8s cycles per sample %0d (expected %0d)", NAME[i], period[i], PERIOD[i]);
      if (period[i] != PERIOD[i]) begin failures++; $display("FAIL %s period", NAME[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
