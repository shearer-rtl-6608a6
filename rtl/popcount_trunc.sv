// popcount_trunc: truncated-node approximate popcount of N bits.
//
// Stage one is exact: 3-input 1-bit adders with a 2-bit result. Stages 2..K
// are 2-bit adders that drop the LSB of their 3-bit sum, so each keeps a
// 2-bit output, (a+b)>>1, and fits one LUT-6. Stages after K are exact and
// widen by one bit each. With K=3 or 4 this is the paper's trunc-3/trunc-4;
// K counts stage one, as in the paper's resource equation. The result
// approximates popcount / 2^(K-1). Zero padding and pipeline registers are
// this design's choices.
//
// Interface: bits/in_valid in, sum/out_valid out after
// hd_pkg::tree_latency(ENC_TRUNC, N) cycles.
module popcount_trunc
  import hd_pkg::*;
#(
  parameter int unsigned N     = 310,
  parameter int unsigned K     = 3,
  parameter int unsigned OUT_W = tree_out_w(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N-1:0]     bits,
  output logic             out_valid,
  output logic [OUT_W-1:0] sum
);
  localparam int unsigned NL = ceil_div(N, 3);

  logic [3*NL-1:0] padded;
  logic [1:0]      leaf [NL];

  assign padded = (3*NL)'(bits);

  always_comb
    for (int unsigned i = 0; i < NL; i++)
      leaf[i] = add3(padded[3*i +: 3]);

  adder_tree #(.NL(NL), .LEAF_W(2), .OUT_W(OUT_W), .TRUNC(K - 1)) u_tree (
    .clk, .rst_n, .in_valid, .in_leaf(leaf), .out_valid, .out_sum(sum)
  );
endmodule
