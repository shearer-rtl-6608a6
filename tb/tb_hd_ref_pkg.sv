// tb_hd_ref_pkg: reference model of the encoder for the testbenches.
//
// It builds the HD item memories the way the encoding scheme defines them:
// level hypervector 0 is random, level l+1 flips DHV/(2*LEVELS) random bits of
// level l; one random seed ID, ID of feature k = seed rotated by k. It then
// computes a sample's encoding directly from the definition, dimension by
// dimension: bound bit = level bit XOR ID bit, the F bits of each group go
// through a behavioural model of the selected tree, and the group results are
// added. The tree models are written from the tree definitions (group counts,
// majority with tie, floor halving), not from the RTL structure. Counters
// record how often the mechanisms of interest occurred (majority ties,
// truncation losses, masked slots).
package tb_hd_ref_pkg;
  import hd_pkg::*;

  int unsigned n_ties = 0;        // majority groups with exactly three ones
  int unsigned n_trunc_loss = 0;  // truncating adders that dropped a 1 LSB
  int unsigned n_overfeed_loss = 0;  // overfed adders that dropped an odd one

  function automatic int unsigned maj_ref(input bit v[], input bit tie, output bit m[]);
    int unsigned c, nm;
    nm = (v.size() + 5) / 6;
    m = new[nm];
    for (int g = 0; g < nm; g++) begin
      c = 0;
      for (int k = 6 * g; k < 6 * g + 6 && k < v.size(); k++) c += v[k];
      if (c == 3) n_ties++;
      m[g] = (c > 3) ? 1'b1 : (c == 3) ? tie : 1'b0;
    end
    return nm;
  endfunction

  function automatic int unsigned count(input bit v[]);
    int unsigned s; s = 0;
    foreach (v[i]) s += v[i];
    return s;
  endfunction

  // Behavioural model of one tree over the bits v.
  function automatic int unsigned tree_ref(input enc_mode_e mode, input int unsigned k,
                                           input bit v[], input bit tie);
    bit m1[], m2[];
    int unsigned a[$], b[$], c, s;
    case (mode)
      ENC_EXACT: return count(v);
      ENC_MAJ: begin
        void'(maj_ref(v, tie, m1));
        return count(m1);
      end
      ENC_MAJ2: begin
        void'(maj_ref(v, tie, m1));
        void'(maj_ref(m1, tie, m2));
        return count(m2);
      end
      ENC_OVERFEED: begin
        s = 0;
        for (int g = 0; g < v.size(); g += 5) begin
          c = 0;
          for (int i = g; i < g + 5 && i < v.size(); i++) c += v[i];
          if (c % 2) n_overfeed_loss++;
          s += c / 2;
        end
        return s;
      end
      default: begin
        for (int g = 0; g < v.size(); g += 3) begin
          c = 0;
          for (int i = g; i < g + 3 && i < v.size(); i++) c += v[i];
          a.push_back(c);
        end
        while (a.size() & (a.size() - 1)) a.push_back(0);
        for (int st = 1; a.size() > 1; st++) begin
          b = {};
          for (int i = 0; i < a.size(); i += 2) begin
            if (st <= k - 1) begin
              if ((a[i] + a[i+1]) % 2) n_trunc_loss++;
              b.push_back((a[i] + a[i+1]) / 2);
            end else b.push_back(a[i] + a[i+1]);
          end
          a = b;
        end
        return a[0];
      end
    endcase
  endfunction

  // Item memories.
  class hd_model;
    int unsigned dhv, div, f, dmem, levels;
    bit lhv[][];   // [level][dim]
    bit seed[];
    enc_mode_e mode;
    int unsigned trunc_k;
    bit ties[];    // per-lane tie bit

    function new(int unsigned dhv, int unsigned div, int unsigned f, int unsigned dmem,
                 int unsigned levels, enc_mode_e mode, int unsigned trunc_k);
      int unsigned nflip;
      this.dhv = dhv; this.div = div; this.f = f; this.dmem = dmem; this.levels = levels;
      this.mode = mode; this.trunc_k = trunc_k;
      lhv = new[levels];
      foreach (lhv[l]) lhv[l] = new[dhv];
      seed = new[dhv];
      for (int d = 0; d < dhv; d++) begin
        lhv[0][d] = 1'($urandom);
        seed[d] = 1'($urandom);
      end
      nflip = dhv / (2 * levels);
      for (int l = 1; l < levels; l++) begin
        lhv[l] = lhv[l-1];
        for (int i = 0; i < nflip; i++) begin
          int unsigned p; p = $urandom_range(dhv - 1);
          lhv[l][p] = ~lhv[l][p];
        end
      end
      ties = new[dmem];
    endfunction

    function automatic bit id_bit(int unsigned k, int unsigned d);
      return seed[(d + k) % dhv];
    endfunction

    // Expected encoding dimension d of a sample.
    function automatic int unsigned enc_dim(int unsigned sample[], int unsigned d);
      int unsigned s, ng;
      bit v[];
      ng = (div + f - 1) / f;
      s = 0;
      v = new[f];
      for (int g = 0; g < ng; g++) begin
        for (int j = 0; j < f; j++) begin
          int unsigned k; k = g * f + j;
          v[j] = (k < div) ? (lhv[sample[k]][d] ^ id_bit(k, d)) : 1'b0;
        end
        s += tree_ref(mode, trunc_k, v, ties[d % dmem]);
      end
      return s;
    endfunction
  endclass
endpackage
