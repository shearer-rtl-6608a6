// popcount_maj: local-majority approximate popcount of N bits.
//
// Each group of six input bits is reduced to its majority bit by one LUT-6;
// when exactly three of the six are 1 the LUT outputs the tree's fixed tie
// bit. The N/6 majority bits then go through an exact tree (3-input adders,
// then 2-input adders). The result approximates popcount/6. The structure and
// the per-tree tie rule are the paper's; zero padding of the last group and
// the pipeline registers are this design's choices.
//
// Interface: bits/in_valid in, sum/out_valid out after
// hd_pkg::tree_latency(ENC_MAJ, N) cycles. tie is a constant per tree.
module popcount_maj
  import hd_pkg::*;
#(
  parameter int unsigned N     = 310,
  parameter int unsigned OUT_W = tree_out_w(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N-1:0]     bits,
  input  logic             tie,
  output logic             out_valid,
  output logic [OUT_W-1:0] sum
);
  localparam int unsigned NM = ceil_div(N, 6);   // majority LUTs
  localparam int unsigned NL = ceil_div(NM, 3);  // 3-input adders

  logic [6*NM-1:0] padded;
  logic [3*NL-1:0] maj;
  logic [1:0]      leaf [NL];

  assign padded = (6*NM)'(bits);

  always_comb begin
    maj = '0;
    for (int unsigned i = 0; i < NM; i++)
      maj[i] = maj6(padded[6*i +: 6], tie);
    for (int unsigned i = 0; i < NL; i++)
      leaf[i] = add3(maj[3*i +: 3]);
  end

  adder_tree #(.NL(NL), .LEAF_W(2), .OUT_W(OUT_W), .TRUNC(0)) u_tree (
    .clk, .rst_n, .in_valid, .in_leaf(leaf), .out_valid, .out_sum(sum)
  );
endmodule
