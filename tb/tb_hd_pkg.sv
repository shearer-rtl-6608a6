// tb_hd_pkg: checks the LUT functions and sizing functions of hd_pkg.
//
// maj6, add3 and overfeed5 are checked exhaustively against bit counts done
// here; tree_leaves and tree_latency are checked against the numbers of the
// default 310-input trees (104, 52->18, 9->3, 62 leaves).
module tb_hd_pkg;
  import hd_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 2; t++)
      for (int v = 0; v < 64; v++) begin
        int c; logic e;
        c = 0; for (int k = 0; k < 6; k++) c += (v >> k) & 1;
        e = (c >= 4) ? 1'b1 : (c == 3) ? 1'(t) : 1'b0;
        chk(maj6(6'(v), 1'(t)) == e, $sformatf("maj6 %0d tie %0d", v, t));
      end
    for (int v = 0; v < 8; v++) begin
      int c; c = 0; for (int k = 0; k < 3; k++) c += (v >> k) & 1;
      chk(add3(3'(v)) == 2'(c), $sformatf("add3 %0d", v));
    end
    for (int v = 0; v < 32; v++) begin
      int c, e; c = 0; for (int k = 0; k < 5; k++) c += (v >> k) & 1;
      e = (c <= 1) ? 0 : (c <= 3) ? 1 : 2;
      chk(overfeed5(5'(v)) == 2'(e), $sformatf("overfeed5 %0d", v));
    end
    chk(ceil_div(617, 310) == 2, "ceil_div");
    chk(ceil_div(40 * 16, 512) == 2, "group size");
    chk(tree_leaves(ENC_EXACT, 310) == 104, "exact leaves");
    chk(tree_leaves(ENC_MAJ, 310) == 18, "maj leaves");
    chk(tree_leaves(ENC_MAJ2, 310) == 3, "maj2 leaves");
    chk(tree_leaves(ENC_OVERFEED, 310) == 62, "overfeed leaves");
    chk(tree_latency(ENC_EXACT, 310) == 8, "exact latency");
    chk(tree_latency(ENC_MAJ, 310) == 6, "maj latency");
    chk(tree_out_w(617) == 10, "acc width");
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
