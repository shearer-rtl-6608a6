// popcount_maj2: cascaded-majority approximate popcount of N bits.
//
// Two stages of 6-input majority LUTs (N -> N/6 -> N/36 bits), both breaking
// ties with the tree's fixed tie bit, followed by an exact tree (3-input
// adders, then 2-input adders). The result approximates popcount/36. The
// paper limits the cascade to these two stages; zero padding of partial groups
// and the pipeline registers are this design's choices.
//
// Interface: bits/in_valid in, sum/out_valid out after
// hd_pkg::tree_latency(ENC_MAJ2, N) cycles.
module popcount_maj2
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
  localparam int unsigned NM1 = ceil_div(N, 6);
  localparam int unsigned NM2 = ceil_div(NM1, 6);
  localparam int unsigned NL  = ceil_div(NM2, 3);

  logic [6*NM1-1:0] padded;
  logic [6*NM2-1:0] maj1;
  logic [3*NL-1:0]  maj2;
  logic [1:0]       leaf [NL];

  assign padded = (6*NM1)'(bits);

  always_comb begin
    maj1 = '0;
    maj2 = '0;
    for (int unsigned i = 0; i < NM1; i++)
      maj1[i] = maj6(padded[6*i +: 6], tie);
    for (int unsigned i = 0; i < NM2; i++)
      maj2[i] = maj6(maj1[6*i +: 6], tie);
    for (int unsigned i = 0; i < NL; i++)
      leaf[i] = add3(maj2[3*i +: 3]);
  end

  adder_tree #(.NL(NL), .LEAF_W(2), .OUT_W(OUT_W), .TRUNC(0)) u_tree (
    .clk, .rst_n, .in_valid, .in_leaf(leaf), .out_valid, .out_sum(sum)
  );
endmodule
