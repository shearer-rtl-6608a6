// popcount_exact: exact pipelined popcount of N bits (the paper's baseline
// adder tree, used in its "exact" encoding mode).
//
// The first LUT layer adds groups of three bits with 3-input 1-bit adders
// (one LUT-5 pair each, 2-bit result); a binary tree of 2-input adders, one
// bit wider per stage, adds the rest. This is the structure the paper gives.
// Padding the input to a multiple of three with zeros and registering every
// stage are this design's choices.
//
// Interface: bits/in_valid in, sum/out_valid out after
// hd_pkg::tree_latency(ENC_EXACT, N) cycles; a new input every cycle.
module popcount_exact
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
  localparam int unsigned NL = ceil_div(N, 3);

  logic [3*NL-1:0] padded;
  logic [1:0]      leaf [NL];

  assign padded = (3*NL)'(bits);

  always_comb
    for (int unsigned i = 0; i < NL; i++)
      leaf[i] = add3(padded[3*i +: 3]);

  adder_tree #(.NL(NL), .LEAF_W(2), .OUT_W(OUT_W), .TRUNC(0)) u_tree (
    .clk, .rst_n, .in_valid, .in_leaf(leaf), .out_valid, .out_sum(sum)
  );
endmodule
