// tb_shearer_encoder: end-to-end test of the encoder in all five tree kinds.
//
// Six reduced-size encoders (DHV 640, DIV 50, F 21, DMEM 16, 16 levels: two
// BRAMs per group, three feature groups of which the last holds 8 features,
// an odd F so one BRAM port of the last memory group is idle) run side by
// side: exact, MAJ, MAJ-2, overfeed, truncated with K=3 and K=4. Each is
// loaded, encodes three samples (two back to back) and is checked bit-exactly
// against the reference model, with latency and throughput checks. The test
// fails if any of these mechanisms never happened: a majority tie, a
// truncation that dropped a bit, an overfed adder that dropped a bit, a
// back-to-back sample, a partly masked feature group.
module tb_shearer_encoder;
  import hd_pkg::*, tb_hd_ref_pkg::*;
  localparam int NE = 6;
  logic clk = 0;
  bit done [NE];
  int c [NE], f [NE], b2b [NE], msk [NE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_shearer_env #(.DHV(640), .DIV(50), .F(21), .DMEM(16), .MODE(ENC_EXACT))
    e0 (.clk, .done(done[0]), .checks(c[0]), .failures(f[0]), .n_b2b(b2b[0]), .n_masked_groups(msk[0]), .period());
  tb_shearer_env #(.DHV(640), .DIV(50), .F(21), .DMEM(16), .MODE(ENC_MAJ))
    e1 (.clk, .done(done[1]), .checks(c[1]), .failures(f[1]), .n_b2b(b2b[1]), .n_masked_groups(msk[1]), .period());
  tb_shearer_env #(.DHV(640), .DIV(50), .F(21), .DMEM(16), .MODE(ENC_MAJ2))
    e2 (.clk, .done(done[2]), .checks(c[2]), .failures(f[2]), .n_b2b(b2b[2]), .n_masked_groups(msk[2]), .period());
  tb_shearer_env #(.DHV(640), .DIV(50), .F(21), .DMEM(16), .MODE(ENC_OVERFEED))
    e3 (.clk, .done(done[3]), .checks(c[3]), .failures(f[3]), .n_b2b(b2b[3]), .n_masked_groups(msk[3]), .period());
  tb_shearer_env #(.DHV(640), .DIV(50), .F(21), .DMEM(16), .MODE(ENC_TRUNC), .TRUNC_K(3))
    e4 (.clk, .done(done[4]), .checks(c[4]), .failures(f[4]), .n_b2b(b2b[4]), .n_masked_groups(msk[4]), .period());
  tb_shearer_env #(.DHV(640), .DIV(50), .F(21), .DMEM(16), .MODE(ENC_TRUNC), .TRUNC_K(4))
    e5 (.clk, .done(done[5]), .checks(c[5]), .failures(f[5]), .n_b2b(b2b[5]), .n_masked_groups(msk[5]), .period());

  task automatic need(input int unsigned n, input string what);
    checks++;
    $display("mechanism %-28s happened %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  initial begin
    int nb, nm;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    nb = 0; nm = 0;
    for (int i = 0; i < NE; i++) begin
      checks += c[i]; failures += f[i]; nb += b2b[i]; nm += msk[i];
    end
    need(n_ties, "majority tie");
    need(n_trunc_loss, "truncated LSB dropped");
    need(n_overfeed_loss, "overfed odd bit dropped");
    need(nb, "back-to-back sample");
    need(nm, "masked feature slots");
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
