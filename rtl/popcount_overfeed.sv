// popcount_overfeed: input-overfeeding approximate popcount of N bits.
//
// Each first-stage LUT-6 (a LUT-5 pair) takes five input bits instead of
// three and outputs a quantized 2-bit sum: 0 for 0-1 ones, 1 for 2-3, 2 for
// 4-5 (one LUT-5 gives the carry, the other the sum MSB). An exact tree of
// 2-input adders adds these values. The result approximates popcount/2. The
// first-stage rule is the paper's; zero padding to a multiple of five and the
// pipeline registers are this design's choices.
//
// Interface: bits/in_valid in, sum/out_valid out after
// hd_pkg::tree_latency(ENC_OVERFEED, N) cycles.
module popcount_overfeed
  import hd_pkg::*;
#(
  parameter int unsigned N     = 310,
  parameter int unsigned OUT_W = tree_out_w(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N-1:0]     bits,
  output logic             out_valid,
  output logic [OUT_W-1:0] sum
);
  localparam int unsigned NL = ceil_div(N, 5);

  logic [5*NL-1:0] padded;
  logic [1:0]      leaf [NL];

  assign padded = (5*NL)'(bits);

  always_comb
    for (int unsigned i = 0; i < NL; i++)
      leaf[i] = overfeed5(padded[5*i +: 5]);

  adder_tree #(.NL(NL), .LEAF_W(2), .OUT_W(OUT_W), .TRUNC(0)) u_tree (
    .clk, .rst_n, .in_valid, .in_leaf(leaf), .out_valid, .out_sum(sum)
  );
endmodule
