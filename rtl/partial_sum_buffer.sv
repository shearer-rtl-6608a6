// partial_sum_buffer: per-dimension accumulators behind the DMEM trees.
//
// A tree only adds the F features of one group, so the DMEM results of each
// group are added into a buffer of partial sums (the adder and register
// drawn behind every tree in the paper's datapath). The first group of a
// segment overwrites the buffer, later groups add to it, and with the last
// group the finished DMEM encoding dimensions are registered at the output
// together with a tag (segment number, last-segment flag) that travelled
// with the data. The accumulator width is this design's choice: wide enough
// for DIV ones, so it cannot overflow.
//
// Timing: out_* valid one cycle after the in_valid beat that carries last.
module partial_sum_buffer #(
  parameter int unsigned DMEM  = 64,
  parameter int unsigned IN_W  = 9,
  parameter int unsigned ACC_W = 10,
  parameter int unsigned TAG_W = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [TAG_W-1:0]  in_tag,
  input  logic [IN_W-1:0]   tree_sum [DMEM],
  output logic              out_valid,
  output logic [TAG_W-1:0]  out_tag,
  output logic [ACC_W-1:0]  out_enc  [DMEM]
);
  logic [ACC_W-1:0] acc      [DMEM];
  logic [ACC_W-1:0] acc_next [DMEM];

  always_comb
    for (int unsigned d = 0; d < DMEM; d++)
      acc_next[d] = (in_first ? '0 : acc[d]) + ACC_W'(tree_sum[d]);

  always_ff @(posedge clk)
    if (in_valid) begin
      acc <= acc_next;
      if (in_last) begin
        out_enc <= acc_next;
        out_tag <= in_tag;
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
endmodule
