// popcount_lane: one per-dimension tree of the encoder, of the kind MODE
// selects (exact, MAJ, MAJ-2, overfeed or truncated with K = TRUNC_K).
//
// It only instantiates the chosen tree; every lane of the encoder has the
// same kind, as one FPGA build implements one encoding. Latency is
// hd_pkg::tree_latency(MODE, N).
module popcount_lane
  import hd_pkg::*;
#(
  parameter enc_mode_e   MODE    = ENC_MAJ,
  parameter int unsigned N       = 310,
  parameter int unsigned TRUNC_K = 3,
  parameter int unsigned OUT_W   = tree_out_w(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N-1:0]     bits,
  input  logic             tie,
  output logic             out_valid,
  output logic [OUT_W-1:0] sum
);
  if (MODE == ENC_EXACT) begin : g_exact
    popcount_exact #(.N(N), .OUT_W(OUT_W)) u (.clk, .rst_n, .in_valid, .bits, .out_valid, .sum);
  end else if (MODE == ENC_MAJ) begin : g_maj
    popcount_maj #(.N(N), .OUT_W(OUT_W)) u (.clk, .rst_n, .in_valid, .bits, .tie, .out_valid, .sum);
  end else if (MODE == ENC_MAJ2) begin : g_maj2
    popcount_maj2 #(.N(N), .OUT_W(OUT_W)) u (.clk, .rst_n, .in_valid, .bits, .tie, .out_valid, .sum);
  end else if (MODE == ENC_OVERFEED) begin : g_over
    popcount_overfeed #(.N(N), .OUT_W(OUT_W)) u (.clk, .rst_n, .in_valid, .bits, .out_valid, .sum);
  end else begin : g_trunc
    popcount_trunc #(.N(N), .K(TRUNC_K), .OUT_W(OUT_W)) u (.clk, .rst_n, .in_valid, .bits, .out_valid, .sum);
  end
endmodule
