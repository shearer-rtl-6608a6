// id_memory: the seed-ID memory, IDW = DMEM + F - 1 bits wide.
//
// Only one ID hypervector (the seed) is stored; the ID of feature k is the
// seed rotated by k. One cycle needs DMEM ID bits for the first feature of
// the group and one more bit for each further feature, so a row is IDW bits,
// built from BANKS = ceil(IDW/DMEM) block RAMs side by side (the paper counts
// 1 + F/d_mem). Rows are written through port A of every bank; reads use
// port B. Timing: rd_data valid one cycle after rd_en.
module id_memory
  import hd_pkg::*;
#(
  parameter int unsigned DMEM = 64,
  parameter int unsigned F    = 310,
  parameter int unsigned ROWS = 512,
  localparam int unsigned IDW   = DMEM + F - 1,
  localparam int unsigned BANKS = ceil_div(IDW, DMEM),
  localparam int unsigned AW    = $clog2(ROWS)
) (
  input  logic           clk,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_row,
  output logic [IDW-1:0] rd_data,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_row,
  input  logic [IDW-1:0] wr_data
);
  logic [BANKS*DMEM-1:0] wpad, rpad;
  logic [DMEM-1:0]       unused_a [BANKS];

  assign wpad = (BANKS*DMEM)'(wr_data);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    bram_512x64 #(.ROWS(ROWS), .WIDTH(DMEM)) u_bram (
      .clk,
      .a_en   (wr_en),
      .a_we   (wr_en),
      .a_addr (wr_row),
      .a_wdata(wpad[b*DMEM +: DMEM]),
      .a_rdata(unused_a[b]),
      .b_en   (rd_en),
      .b_addr (rd_row),
      .b_rdata(rpad[b*DMEM +: DMEM])
    );
  end

  assign rd_data = rpad[IDW-1:0];
endmodule
