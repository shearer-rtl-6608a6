// level_to_address: maps a quantized feature and a dimension segment to the
// block RAM and row that hold those DMEM bits of the level hypervector.
//
// The paper's encoder turns every feature value into a memory address instead
// of multiplexing level hypervectors. It does not give the layout; this design
// stores level hypervector l, segment s (bits s*DMEM .. s*DMEM+DMEM-1) at the
// linear row r = l*SEGS + s of a group, split over the group's BRAMs as
// BRAM r / ROWS, row r mod ROWS. Purely combinational.
module level_to_address
  import hd_pkg::*;
#(
  parameter int unsigned LEVELS     = 16,
  parameter int unsigned SEGS       = 40,
  parameter int unsigned ROWS       = 512,
  parameter int unsigned GROUP_SIZE = ceil_div(LEVELS * SEGS, ROWS),
  localparam int unsigned LW = idx_w(LEVELS),
  localparam int unsigned SW = idx_w(SEGS),
  localparam int unsigned GW = idx_w(GROUP_SIZE),
  localparam int unsigned AW = $clog2(ROWS)
) (
  input  logic [LW-1:0] level,
  input  logic [SW-1:0] seg,
  output logic [GW-1:0] bram_sel,
  output logic [AW-1:0] row
);
  // wide enough for the row count and for ROWS itself
  localparam int unsigned RW = $clog2(LEVELS * SEGS + ROWS + 1);
  logic [RW-1:0] lin;

  always_comb begin
    lin      = RW'(level) * RW'(SEGS) + RW'(seg);
    bram_sel = GW'(lin / RW'(ROWS));
    row      = AW'(lin % RW'(ROWS));
  end
endmodule
