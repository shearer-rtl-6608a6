// encoder_controller: schedules one encoding over segments and feature groups.
//
// After a sample is accepted (in_valid && in_ready) the controller issues one
// memory read per cycle: for each segment of DMEM dimensions (outer loop,
// SEGS of them) it steps through the NGROUPS feature groups (inner loop), so
// one sample takes SEGS * NGROUPS cycles, the paper's
// ceil(d_hv/d_mem) x ceil(d_iv/F). first/last mark the first and last group of
// a segment; sample_last marks the very last issue, in which cycle the next
// sample may already be accepted, so back-to-back samples leave no bubble.
// Reset (asynchronous, active low) returns it to idle.
module encoder_controller
  import hd_pkg::*;
#(
  parameter int unsigned SEGS    = 40,
  parameter int unsigned NGROUPS = 2,
  localparam int unsigned SW = idx_w(SEGS),
  localparam int unsigned GW = idx_w(NGROUPS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  output logic          accept,
  output logic          issue,
  output logic [SW-1:0] seg,
  output logic [GW-1:0] grp,
  output logic          first,
  output logic          last,
  output logic          sample_last
);
  logic busy;

  assign issue       = busy;
  assign first       = (grp == '0);
  assign last        = (grp == GW'(NGROUPS - 1));
  assign sample_last = busy && last && (seg == SW'(SEGS - 1));
  assign in_ready    = !busy || sample_last;
  assign accept      = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      seg  <= '0;
      grp  <= '0;
    end else if (accept) begin
      busy <= 1'b1;
      seg  <= '0;
      grp  <= '0;
    end else if (busy) begin
      if (sample_last) begin
        busy <= 1'b0;
        seg  <= '0;
        grp  <= '0;
      end else if (last) begin
        grp <= '0;
        seg <= seg + 1'b1;
      end else begin
        grp <= grp + 1'b1;
      end
    end
  end
endmodule
