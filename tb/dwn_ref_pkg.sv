// dwn_ref_pkg: behavioural reference model of DWN inference for the
// testbenches.
//
// Works on dynamic bit arrays, one entry per signal bit, and reads the model
// (mapping and LUT contents) through the same dwn_pkg functions the RTL
// elaborates from, so its answers hold for any model those functions
// describe. It shares no structure with the RTL: no address muxing in two
// halves, no adder tree, no pipeline.
package dwn_ref_pkg;
  import dwn_pkg::*;

  // One LUT layer: out[j] = table_j[ address formed from the mapped inputs ].
  function automatic void eval_layer(input bit in_v[], input int unsigned n_luts,
                                     input int unsigned k, input int unsigned seed,
                                     input map_style_e style, output bit out_v[]);
    out_v = new[n_luts];
    for (int unsigned j = 0; j < n_luts; j++) begin
      int unsigned a;
      logic [63:0] t;
      a = 0;
      for (int unsigned b = 0; b < k; b++) begin
        int unsigned idx;
        idx = map_index(seed, style, j, b, k, in_v.size());
        if (in_v[idx]) a += (1 << b);
      end
      t = table_init(seed, j);
      out_v[j] = t[a];
    end
  endfunction

  // Thermometer expansion of a vector of feature levels (bit i of feature f = level > i).
  function automatic void expand(input int unsigned levels[], input int unsigned z,
                                 output bit out_v[]);
    out_v = new[levels.size() * z];
    for (int f = 0; f < levels.size(); f++)
      for (int unsigned i = 0; i < z; i++) out_v[f*z + i] = (levels[f] > i);
  endfunction

  // Popcount head: scores per class and the lowest index of the maximum.
  function automatic int unsigned popcount_head(input bit fin[], input int unsigned classes,
                                                output int unsigned scores[], output bit tie);
    int unsigned g, best;
    g = fin.size() / classes;
    scores = new[classes];
    for (int unsigned c = 0; c < classes; c++) begin
      scores[c] = 0;
      for (int unsigned i = 0; i < g; i++) scores[c] += fin[c*g + i];
    end
    best = 0;
    for (int unsigned c = 1; c < classes; c++) if (scores[c] > scores[best]) best = c;
    tie = 0;
    for (int unsigned c = 0; c < classes; c++) if (c != best && scores[c] == scores[best]) tie = 1;
    return best;
  endfunction

  // Reduction pyramid down to one bit.
  function automatic bit reduction_head(input bit fin[], input int unsigned k,
                                        input int unsigned seed);
    bit cur[];
    bit nxt[];
    int unsigned l;
    cur = fin;
    l = 0;
    while (cur.size() > 1) begin
      eval_layer(cur, (cur.size() + k - 1) / k, k, reduction_seed(seed, l), MAP_TREE, nxt);
      cur = nxt;
      l++;
    end
    return cur[0];
  endfunction

endpackage
