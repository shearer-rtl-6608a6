// bind_xor: binding of the fetched level bits with the rotated ID bits.
//
// For each of the F feature slots of the current group, the DMEM fetched level
// bits are XORed with DMEM ID bits. Slot j takes bits j .. j+DMEM-1 of the ID
// window read this cycle, which realises "ID of feature k = seed rotated by k"
// with fixed wiring, as the paper describes. Slots beyond the last feature of
// the input (the last group may be partly empty) are forced to 0, so they add
// nothing to the trees; that masking is this design's choice. The output is
// transposed so that bound[d] holds the F bits that dimension d's tree adds.
// Purely combinational.
module bind_xor #(
  parameter int unsigned F    = 310,
  parameter int unsigned DMEM = 64
) (
  input  logic [DMEM-1:0]     level_bits [F],
  input  logic [DMEM+F-2:0]   id_window,
  input  logic [F-1:0]        slot_valid,
  output logic [F-1:0]        bound [DMEM]
);
  always_comb
    for (int unsigned d = 0; d < DMEM; d++)
      for (int unsigned j = 0; j < F; j++)
        bound[d][j] = slot_valid[j] & (level_bits[j][d] ^ id_window[j + d]);
endmodule
