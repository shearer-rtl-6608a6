// hd_pkg: types and constants shared by the hyperdimensional (HD) encoder.
//
// It holds the encoding-mode enum that selects one of the five per-dimension
// popcount trees (exact, local majority, cascaded majority, input overfeeding,
// truncated nodes), the small LUT functions those trees are built from, and
// constant functions that size the trees and give their pipeline latency.
// The LUT functions follow the paper's definitions: a 6-input majority that
// returns a fixed tie bit when exactly three inputs are 1, a 5-input adder that
// outputs floor(sum/2) on two bits, and a plain 3-input adder. The sizing
// functions (zero padding to whole groups, pipeline depth) are this design's
// own choice. There is no timing here; everything is combinational.
package hd_pkg;

  typedef enum logic [2:0] {
    ENC_EXACT    = 3'd0,  // exact adder tree
    ENC_MAJ      = 3'd1,  // one stage of 6-input majority, then exact tree
    ENC_MAJ2     = 3'd2,  // two cascaded majority stages, then exact tree
    ENC_OVERFEED = 3'd3,  // 5-input quantized first stage, then exact tree
    ENC_TRUNC    = 3'd4   // exact first stage, LSB-truncated next stages
  } enc_mode_e;

  // 6-input majority with a fixed tie value (three ones out of six).
  function automatic logic maj6(input logic [5:0] b, input logic tie);
    int unsigned c;
    c = $countones(b);
    if (c > 3) return 1'b1;
    if (c == 3) return tie;
    return 1'b0;
  endfunction

  // 3-input 1-bit adder: one LUT-5 pair, 2-bit sum.
  function automatic logic [1:0] add3(input logic [2:0] b);
    return 2'(b[0]) + 2'(b[1]) + 2'(b[2]);
  endfunction

  // Overfed 5-input adder: 0-1 -> 0, 2-3 -> 1, 4-5 -> 2.
  function automatic logic [1:0] overfeed5(input logic [4:0] b);
    logic [2:0] s;
    s = 3'(b[0]) + 3'(b[1]) + 3'(b[2]) + 3'(b[3]) + 3'(b[4]);
    return 2'(s >> 1);
  endfunction

  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Index width that is never zero.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Number of leaves (outputs of the first LUT layer) of a tree over n bits.
  function automatic int unsigned tree_leaves(input enc_mode_e mode, input int unsigned n);
    case (mode)
      ENC_MAJ:      return ceil_div(ceil_div(n, 6), 3);
      ENC_MAJ2:     return ceil_div(ceil_div(ceil_div(n, 6), 6), 3);
      ENC_OVERFEED: return ceil_div(n, 5);
      default:      return ceil_div(n, 3);
    endcase
  endfunction

  // Pipeline latency of a popcount tree: one register after the LUT layer,
  // one after every adder stage.
  function automatic int unsigned tree_latency(input enc_mode_e mode, input int unsigned n);
    int unsigned l;
    l = tree_leaves(mode, n);
    return 1 + ((l > 1) ? $clog2(l) : 0);
  endfunction

  // Output width that holds any tree's result for n inputs.
  function automatic int unsigned tree_out_w(input int unsigned n);
    return $clog2(n + 1);
  endfunction

endpackage
