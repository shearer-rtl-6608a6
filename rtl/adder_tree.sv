// adder_tree: pipelined binary tree of 2-input adders over NL small leaves.
//
// This is the part shared by every popcount tree of the encoder. The leaves
// come from the first LUT layer of the calling tree (3-input adders, majority
// votes or overfed adders). They are registered, then added pairwise, one
// register per stage, as the paper pipelines its adder trees. The leaf count
// is padded with zeros to a power of two. The first TRUNC adder stages are the
// paper's "truncated nodes": each keeps only the two upper bits of the 3-bit
// sum of two 2-bit values, i.e. (a+b)>>1. Later stages are exact and grow by
// one bit per stage (the stored width is OUT_W throughout; the upper bits of
// early stages are constant zero and are trimmed by synthesis).
//
// Timing: out_sum/out_valid appear LAT = 1 + ceil(log2(NL)) cycles after
// in_leaf/in_valid. One new input per cycle. No reset on the data path; the
// valid chain is reset.
module adder_tree #(
  parameter int unsigned NL     = 104,  // number of leaves
  parameter int unsigned LEAF_W = 2,    // width of a leaf
  parameter int unsigned OUT_W  = 9,    // result width
  parameter int unsigned TRUNC  = 0     // number of LSB-truncating stages
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [LEAF_W-1:0]     in_leaf [NL],
  output logic                  out_valid,
  output logic [OUT_W-1:0]      out_sum
);
  localparam int unsigned S  = (NL > 1) ? $clog2(NL) : 0;
  localparam int unsigned NP = 1 << S;

  logic [OUT_W-1:0] node [S+1][NP];
  logic             vld  [S+1];

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < NP; i++)
      node[0][i] <= (i < NL) ? OUT_W'(in_leaf[i]) : '0;
    for (int unsigned st = 1; st <= S; st++) begin
      for (int unsigned i = 0; i < (NP >> st); i++) begin
        if (st <= TRUNC)
          node[st][i] <= OUT_W'((node[st-1][2*i] + node[st-1][2*i+1]) >> 1);
        else
          node[st][i] <= node[st-1][2*i] + node[st-1][2*i+1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned st = 0; st <= S; st++) vld[st] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int unsigned st = 1; st <= S; st++) vld[st] <= vld[st-1];
    end
  end

  assign out_sum   = node[S][0];
  assign out_valid = vld[S];
endmodule
