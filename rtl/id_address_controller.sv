// id_address_controller: row of the seed-ID memory for a (segment, group).
//
// The ID memory holds, per row, the window of seed-ID bits that one cycle of
// the encoder needs: DMEM + F - 1 consecutive bits starting at
// seg*DMEM + grp*F (mod DHV). The rows are laid out segment-major, so the row
// is seg*NGROUPS + grp. The paper only names this unit; the layout is this
// design's reading of its "data-width of d_mem + F - 1" ID memory.
// Purely combinational.
module id_address_controller
  import hd_pkg::*;
#(
  parameter int unsigned SEGS    = 40,
  parameter int unsigned NGROUPS = 2,
  parameter int unsigned ROWS    = 512,
  localparam int unsigned SW = idx_w(SEGS),
  localparam int unsigned GW = idx_w(NGROUPS),
  localparam int unsigned AW = $clog2(ROWS)
) (
  input  logic [SW-1:0] seg,
  input  logic [GW-1:0] grp,
  output logic [AW-1:0] row
);
  assign row = AW'(AW'(seg) * AW'(NGROUPS) + AW'(grp));

  initial assert (SEGS * NGROUPS <= ROWS)
    else $error("ID memory needs %0d rows, has %0d", SEGS * NGROUPS, ROWS);
endmodule
