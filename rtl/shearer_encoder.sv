// shearer_encoder: BRAM-oriented hyperdimensional encoder with approximate
// per-dimension popcount trees.
//
// Encoding: H[d] = sum over features k of ( L[level_k][d] XOR ID_k[d] ), where
// L[0..LEVELS-1] are the level hypervectors, ID_k is the seed ID rotated by k
// and -1 is stored as 0, so H[d] counts ones. The encoder works on DMEM
// dimensions (a "segment") and F features per cycle:
//   * feature_buffer cuts the held sample into groups of F features;
//   * F/2 level_bram_group instances each hold all level hypervectors; a
//     feature's level is turned into a BRAM address (no level multiplexers),
//     two features share a group through the two BRAM ports;
//   * id_memory delivers DMEM+F-1 seed-ID bits per cycle, row chosen by
//     id_address_controller; bind_xor gives slot j ID bits j..j+DMEM-1;
//   * DMEM popcount trees (kind set by MODE) add the F bound bits of their
//     dimension; partial_sum_buffer accumulates the NGROUPS group results.
// One sample takes SEGS*NGROUPS cycles (80 at the defaults: DHV 2560, DIV 617,
// F 310, DMEM 64), one segment result every NGROUPS cycles. The datapath,
// sizes and approximate trees follow the paper; the input handshake, the
// memory-load ports, the memory layouts, zero padding, the pipeline registers
// and the default tie bits are this design's choices.
//
// Interface:
//   in_valid/in_ready/in_sample: one quantized sample (DIV level indices).
//     Accepted while idle or in the last issue cycle of the previous sample.
//   lvl_wr_*: broadcast load of level row level*SEGS+seg (DMEM bits) into all
//     groups; id_wr_*: load of ID row seg*NGROUPS+grp (DMEM+F-1 bits).
//     Loads are allowed only while no sample is in flight.
//   out_valid/out_seg/out_last/out_enc: DMEM encoding dimensions
//     out_seg*DMEM .. out_seg*DMEM+DMEM-1; out_last on the last segment.
// Latency from acceptance to the first out_valid: NGROUPS + LAT + 2 cycles,
// LAT = hd_pkg::tree_latency(MODE, F).
module shearer_encoder
  import hd_pkg::*;
#(
  parameter int unsigned DHV     = 2560,
  parameter int unsigned DIV     = 617,
  parameter int unsigned F       = 310,
  parameter int unsigned DMEM    = 64,
  parameter int unsigned LEVELS  = 16,
  parameter int unsigned ROWS    = 512,
  parameter enc_mode_e   MODE    = ENC_MAJ,
  parameter int unsigned TRUNC_K = 3,
  parameter logic [DMEM-1:0] TIE_BITS = DMEM'(64'h9E37_79B9_7F4A_7C15),
  localparam int unsigned SEGS    = ceil_div(DHV, DMEM),
  localparam int unsigned NGROUPS = ceil_div(DIV, F),
  localparam int unsigned NMG     = ceil_div(F, 2),
  localparam int unsigned IDW     = DMEM + F - 1,
  localparam int unsigned LW      = idx_w(LEVELS),
  localparam int unsigned SW      = idx_w(SEGS),
  localparam int unsigned GW      = idx_w(NGROUPS),
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned WRW     = $clog2(LEVELS * SEGS),
  localparam int unsigned TW      = tree_out_w(F),
  localparam int unsigned ACC_W   = tree_out_w(DIV)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [LW-1:0]    in_sample [DIV],
  input  logic             lvl_wr_en,
  input  logic [WRW-1:0]   lvl_wr_row,
  input  logic [DMEM-1:0]  lvl_wr_data,
  input  logic             id_wr_en,
  input  logic [AW-1:0]    id_wr_row,
  input  logic [IDW-1:0]   id_wr_data,
  output logic             out_valid,
  output logic [SW-1:0]    out_seg,
  output logic             out_last,
  output logic [ACC_W-1:0] out_enc [DMEM]
);
  localparam int unsigned LAT   = tree_latency(MODE, F);
  localparam int unsigned TAG_W = SW + 1;

  // ---------------- control ----------------
  logic          accept, issue, first, last, sample_last;
  logic [SW-1:0] seg;
  logic [GW-1:0] grp;

  encoder_controller #(.SEGS(SEGS), .NGROUPS(NGROUPS)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .accept, .issue, .seg, .grp,
    .first, .last, .sample_last
  );

  // ---------------- features ----------------
  logic [LW-1:0] slot_level [F];
  logic [F-1:0]  slot_valid;

  feature_buffer #(.DIV(DIV), .F(F), .LEVELS(LEVELS)) u_feat (
    .clk, .load(accept), .sample(in_sample), .grp, .slot_level, .slot_valid
  );

  // ---------------- level memory groups ----------------
  logic [DMEM-1:0] level_bits [F];
  logic [DMEM-1:0] grp_d0 [NMG];
  logic [DMEM-1:0] grp_d1 [NMG];

  for (genvar m = 0; m < NMG; m++) begin : g_grp
    level_bram_group #(.LEVELS(LEVELS), .DHV(DHV), .DMEM(DMEM), .ROWS(ROWS)) u_lvl (
      .clk,
      .rd_en  (issue),
      .seg,
      .level0 (slot_level[2*m]),
      .level1 (slot_level[(2*m+1 < F) ? 2*m+1 : 2*m]),
      .data0  (grp_d0[m]),
      .data1  (grp_d1[m]),
      .wr_en  (lvl_wr_en),
      .wr_row (lvl_wr_row),
      .wr_data(lvl_wr_data)
    );
  end

  always_comb
    for (int unsigned j = 0; j < F; j++)
      level_bits[j] = (j % 2 == 0) ? grp_d0[j/2] : grp_d1[j/2];

  // ---------------- seed-ID memory ----------------
  logic [AW-1:0]  id_row;
  logic [IDW-1:0] id_window;

  id_address_controller #(.SEGS(SEGS), .NGROUPS(NGROUPS), .ROWS(ROWS)) u_idac (
    .seg, .grp, .row(id_row)
  );

  id_memory #(.DMEM(DMEM), .F(F), .ROWS(ROWS)) u_id (
    .clk, .rd_en(issue), .rd_row(id_row), .rd_data(id_window),
    .wr_en(id_wr_en), .wr_row(id_wr_row), .wr_data(id_wr_data)
  );

  // ---------------- memory read stage (1 cycle) ----------------
  logic          v1, first1, last1;
  logic [SW-1:0] seg1;
  logic          slast1;
  logic [F-1:0]  slot_valid1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= issue;

  always_ff @(posedge clk) begin
    first1      <= first;
    last1       <= last;
    seg1        <= seg;
    slast1      <= sample_last;
    slot_valid1 <= slot_valid;
  end

  // ---------------- binding ----------------
  logic [F-1:0] bound [DMEM];

  bind_xor #(.F(F), .DMEM(DMEM)) u_bind (
    .level_bits, .id_window, .slot_valid(slot_valid1), .bound
  );

  // ---------------- per-dimension trees ----------------
  logic [TW-1:0] tree_sum [DMEM];
  logic [DMEM-1:0] tree_v;

  for (genvar d = 0; d < DMEM; d++) begin : g_lane
    popcount_lane #(.MODE(MODE), .N(F), .TRUNC_K(TRUNC_K), .OUT_W(TW)) u_pc (
      .clk, .rst_n, .in_valid(v1), .bits(bound[d]), .tie(TIE_BITS[d]),
      .out_valid(tree_v[d]), .sum(tree_sum[d])
    );
  end

  // Sideband (first/last/tag) travels beside the trees for LAT cycles.
  logic [TAG_W+1:0] side [LAT];
  always_ff @(posedge clk) begin
    side[0] <= {first1, last1, slast1, seg1};
    for (int unsigned i = 1; i < LAT; i++) side[i] <= side[i-1];
  end
  // side[0] is registered once more than the data entering the trees, so the
  // entry aligned with the tree outputs is side[LAT-1].
  logic             acc_first, acc_last;
  logic [TAG_W-1:0] acc_tag, out_tag;
  assign {acc_first, acc_last, acc_tag} = side[LAT-1];

  // ---------------- partial sums ----------------
  partial_sum_buffer #(.DMEM(DMEM), .IN_W(TW), .ACC_W(ACC_W), .TAG_W(TAG_W)) u_psum (
    .clk, .rst_n, .in_valid(tree_v[0]), .in_first(acc_first), .in_last(acc_last),
    .in_tag(acc_tag), .tree_sum, .out_valid, .out_tag, .out_enc
  );
  assign {out_last, out_seg} = out_tag;

  // ---------------- rules of the interface ----------------
  assert property (@(posedge clk) disable iff (!rst_n) (lvl_wr_en || id_wr_en) |-> (in_ready && !v1 && tree_v == '0))
    else $error("memory load while an encoding is in flight");
  assert property (@(posedge clk) disable iff (!rst_n) tree_v == '0 || tree_v == '1)
    else $error("popcount lanes out of step");
endmodule
