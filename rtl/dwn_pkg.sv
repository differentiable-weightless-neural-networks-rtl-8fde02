// dwn_pkg: types, constants and model-content functions shared by the DWN
// (Differentiable Weightless Neural Network) inference datapath.
//
// A trained DWN is fully described at inference time by two things per
// RAM node: which previous-layer bits feed its n address inputs (the learned
// mapping, fixed after training) and its 2^n stored bits. The RTL takes both
// from the two functions below, map_index() and table_init(), evaluated at
// elaboration time. As shipped they produce a deterministic pseudo-random
// model (a stand-in for trained values, which are not part of this design);
// to deploy a trained model, replace their bodies with the trained mapping
// and contents. Every testbench's reference model calls the same functions, so
// the checks remain valid for any model.
//
// Address convention (this design's choice): mapped input k of a node drives
// address bit k, so input 0 is the least significant address bit.
package dwn_pkg;

  // Output stage after the last LUT layer: per-class popcount + argmax
  // (FPGA accelerator), or a pyramid of LUT layers (learnable reduction).
  typedef enum logic {
    HEAD_POPCOUNT  = 1'b0,
    HEAD_REDUCTION = 1'b1
  } head_e;

  // How a layer's node inputs are wired to the previous layer.
  //   MAP_LEARNED : arbitrary per-input index (learned mapping; here pseudo-random)
  //   MAP_TREE    : node j reads bits j*K .. j*K+K-1 (pyramid of the reduction head)
  typedef enum logic {
    MAP_LEARNED = 1'b0,
    MAP_TREE    = 1'b1
  } map_style_e;

  // Largest RAM-node fan-in supported by table_init() (LUT-6, as on the FPGA).
  localparam int unsigned MAX_K = 6;

  // Upper bound on the number of LUT layers in the accelerator's body.
  localparam int unsigned MAX_LAYERS = 8;

  // 32-bit integer mixer used to derive the stand-in model.
  function automatic logic [31:0] mix3(input logic [31:0] a, input logic [31:0] b,
                                       input logic [31:0] c);
    logic [31:0] h;
    h = 32'h9E37_79B9 ^ a;
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h ^ (b * 32'hC2B2_AE35);
    h = h * 32'h27D4_EB2F;
    h = h ^ (h >> 15);
    h = h ^ (c * 32'h1656_67B1);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Index of the previous-layer bit that drives address input k of node lut.
  function automatic int unsigned map_index(input int unsigned seed, input map_style_e style,
                                            input int unsigned lut, input int unsigned k,
                                            input int unsigned kk, input int unsigned n_in);
    int unsigned idx;
    if (style == MAP_TREE) begin
      idx = lut * kk + k;
      if (idx >= n_in) idx = n_in - 1;  // short last group re-reads the last bit
    end else begin
      idx = int'(mix3(seed, lut, k) % n_in);
    end
    return idx;
  endfunction

  // Contents of node lut (bit a = output for address a); only the low 2^K bits are used.
  function automatic logic [63:0] table_init(input int unsigned seed, input int unsigned lut);
    return {mix3(seed, lut, 32'h7AB1_E001), mix3(seed, lut, 32'h7AB1_E002)};
  endfunction

  // Seed of body layer l for a given model seed (distinct per layer).
  function automatic int unsigned layer_seed(input int unsigned seed, input int unsigned l);
    return seed * 64 + l;
  endfunction

  // Seed of reduction-pyramid level l.
  function automatic int unsigned reduction_seed(input int unsigned seed, input int unsigned l);
    return seed * 64 + 32 + l;
  endfunction

  // Width after one pyramid level of K-input nodes: ceil(w / K).
  function automatic int unsigned reduce_width(input int unsigned w, input int unsigned kk);
    return (w + kk - 1) / kk;
  endfunction

  // Number of pyramid levels to reduce w bits to one.
  function automatic int unsigned reduce_levels(input int unsigned w, input int unsigned kk);
    int unsigned n;
    int unsigned x;
    n = 0;
    x = w;
    while (x > 1) begin
      x = (x + kk - 1) / kk;
      n++;
    end
    return n;
  endfunction

  // Width of pyramid level l's input (level 0 = w).
  function automatic int unsigned level_width(input int unsigned w, input int unsigned kk,
                                              input int unsigned l);
    int unsigned x;
    x = w;
    for (int unsigned i = 0; i < l; i++) x = (x + kk - 1) / kk;
    return x;
  endfunction

endpackage
