// feature_buffer: holds one quantized input sample and serves the features of
// the current group to the F processing slots.
//
// A sample of DIV level indices is captured on load and kept for the whole
// encoding. In group g, slot j receives feature g*F + j; slots past DIV (in a
// partly filled last group) get level 0 and slot_valid = 0. This is the
// "cutting" of the input into groups of F features drawn in the paper's
// datapath; taking the whole sample in one beat is this design's choice.
// Combinational read, registered capture.
module feature_buffer
  import hd_pkg::*;
#(
  parameter int unsigned DIV    = 617,
  parameter int unsigned F      = 310,
  parameter int unsigned LEVELS = 16,
  localparam int unsigned NGROUPS = ceil_div(DIV, F),
  localparam int unsigned LW = idx_w(LEVELS),
  localparam int unsigned GW = idx_w(NGROUPS)
) (
  input  logic          clk,
  input  logic          load,
  input  logic [LW-1:0] sample     [DIV],
  input  logic [GW-1:0] grp,
  output logic [LW-1:0] slot_level [F],
  output logic [F-1:0]  slot_valid
);
  logic [LW-1:0] feat [DIV];

  always_ff @(posedge clk)
    if (load) feat <= sample;

  always_comb
    for (int unsigned j = 0; j < F; j++) begin
      slot_level[j] = '0;
      slot_valid[j] = 1'b0;
      for (int unsigned g = 0; g < NGROUPS; g++)
        if (grp == GW'(g) && g * F + j < DIV) begin
          slot_level[j] = feat[g * F + j];
          slot_valid[j] = 1'b1;
        end
    end
endmodule
