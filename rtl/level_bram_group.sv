// level_bram_group: one memory group of the encoder, holding all LEVELS level
// hypervectors (DHV bits each) for two features at once.
//
// The group is GROUP_SIZE = ceil(LEVELS*DHV / (ROWS*DMEM)) block RAMs; each
// BRAM has two read ports, so two features share one group, as in the paper.
// For each port a level_to_address unit turns the feature's level and the
// current segment into a BRAM index and a row; only that BRAM's port is
// enabled. The BRAM index is registered with the read and drives the output
// multiplexer one cycle later. Level rows are loaded through a write port on
// port A; in the encoder every group receives the same broadcast writes.
//
// Timing: data0/data1 are valid one cycle after rd_en. Writes must not
// overlap reads (the top only loads while idle).
module level_bram_group
  import hd_pkg::*;
#(
  parameter int unsigned LEVELS = 16,
  parameter int unsigned DHV    = 2560,
  parameter int unsigned DMEM   = 64,
  parameter int unsigned ROWS   = 512,
  localparam int unsigned SEGS       = ceil_div(DHV, DMEM),
  localparam int unsigned GROUP_SIZE = ceil_div(LEVELS * SEGS, ROWS),
  localparam int unsigned LW = idx_w(LEVELS),
  localparam int unsigned SW = idx_w(SEGS),
  localparam int unsigned GW = idx_w(GROUP_SIZE),
  localparam int unsigned AW = $clog2(ROWS),
  localparam int unsigned WRW = $clog2(LEVELS * SEGS)
) (
  input  logic            clk,
  input  logic            rd_en,
  input  logic [SW-1:0]   seg,
  input  logic [LW-1:0]   level0,
  input  logic [LW-1:0]   level1,
  output logic [DMEM-1:0] data0,
  output logic [DMEM-1:0] data1,
  input  logic            wr_en,
  input  logic [WRW-1:0]  wr_row,   // linear row: level*SEGS + segment
  input  logic [DMEM-1:0] wr_data
);
  logic [GW-1:0] sel0, sel1, sel0_q, sel1_q;
  logic [AW-1:0] row0, row1;
  logic [GW-1:0] wsel;
  logic [AW-1:0] wrow;
  logic [DMEM-1:0] qa [GROUP_SIZE];
  logic [DMEM-1:0] qb [GROUP_SIZE];

  level_to_address #(.LEVELS(LEVELS), .SEGS(SEGS), .ROWS(ROWS), .GROUP_SIZE(GROUP_SIZE))
    u_l2a0 (.level(level0), .seg, .bram_sel(sel0), .row(row0));
  level_to_address #(.LEVELS(LEVELS), .SEGS(SEGS), .ROWS(ROWS), .GROUP_SIZE(GROUP_SIZE))
    u_l2a1 (.level(level1), .seg, .bram_sel(sel1), .row(row1));

  localparam int unsigned XW = $clog2(LEVELS * SEGS + ROWS + 1);
  assign wsel = GW'(XW'(wr_row) / XW'(ROWS));
  assign wrow = AW'(XW'(wr_row) % XW'(ROWS));

  for (genvar b = 0; b < GROUP_SIZE; b++) begin : g_bram
    bram_512x64 #(.ROWS(ROWS), .WIDTH(DMEM)) u_bram (
      .clk,
      .a_en   ((rd_en && sel0 == GW'(b)) || (wr_en && wsel == GW'(b))),
      .a_we   (wr_en && wsel == GW'(b)),
      .a_addr (wr_en ? wrow : row0),
      .a_wdata(wr_data),
      .a_rdata(qa[b]),
      .b_en   (rd_en && sel1 == GW'(b)),
      .b_addr (row1),
      .b_rdata(qb[b])
    );
  end

  always_ff @(posedge clk)
    if (rd_en) begin
      sel0_q <= sel0;
      sel1_q <= sel1;
    end

  assign data0 = qa[sel0_q];
  assign data1 = qb[sel1_q];
endmodule
