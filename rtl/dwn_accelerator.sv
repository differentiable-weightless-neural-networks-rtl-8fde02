// dwn_accelerator: fully pipelined inference engine for a Differentiable
// Weightless Neural Network (DWN).
//
// Datapath, front to back:
//   1. dwn_input_interface receives a compressed sample over a BUS_W-bit port,
//      buffers its beats and expands every feature to its Z-bit thermometer
//      code (registered, 1 cycle after the last beat).
//   2. NUM_LAYERS dwn_lut_layer stages. Layer l holds LAYER_LUTS[l] RAM nodes
//      of LUT_K inputs each, wired to the previous layer by the fixed learned
//      mapping, with a register on every node output (1 cycle per layer).
//   3. The output head, chosen by HEAD:
//      HEAD_POPCOUNT  - the final layer's bits are split into NUM_CLASSES
//                       equal contiguous groups (class c owns bits
//                       [c*G +: G]); a popcount per group is registered
//                       (1 cycle), then the argmax of the counts is
//                       registered as the class (1 cycle).
//      HEAD_REDUCTION - a dwn_reduction_tree pyramid of LUT_K-input nodes
//                       reduces the final layer to one bit, the class of a
//                       two-class problem (1 cycle per pyramid level).
// Nothing in the datapath stalls: after the input beats, a sample moves one
// stage per cycle and a new one may follow on the next cycle, so the core
// sustains one sample per clock and the input port (BEATS cycles per
// sample) sets the throughput.
//
// Latency, from the cycle of the first input beat (consecutive beats) to
// out_valid: BEATS + 1 + NUM_LAYERS + 2 cycles with the popcount head.
// At the defaults (BEATS = 7, two layers) that is 12 cycles.
//
// Defaults are the MNIST "n=6, sm" model of the source: 784 features, z = 1,
// layers of 1000 and 500 LUT-6 nodes, 10 classes, 112-bit input port. The
// group-to-class assignment, reset scheme and port protocol are this
// design's choices. LUT contents and mapping come from dwn_pkg (see there).
module dwn_accelerator
  import dwn_pkg::*;
#(
  parameter int unsigned BUS_W                   = 112,
  parameter int unsigned NUM_FEATURES            = 784,
  parameter int unsigned Z                       = 1,
  parameter int unsigned LUT_K                   = 6,
  parameter int unsigned NUM_LAYERS              = 2,
  parameter int unsigned LAYER_LUTS [MAX_LAYERS] = '{1000, 500, 0, 0, 0, 0, 0, 0},
  parameter int unsigned NUM_CLASSES             = 10,
  parameter head_e       HEAD                    = HEAD_POPCOUNT,
  parameter int unsigned SEED                    = 1,
  parameter int unsigned CLASS_W                 = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // compressed sample stream
  input  logic               in_valid,
  input  logic [BUS_W-1:0]   in_data,
  // classification result, one cycle wide per sample
  output logic               out_valid,
  output logic [CLASS_W-1:0] out_class
);

  localparam int unsigned IN_BITS = NUM_FEATURES * Z;
  localparam int unsigned FINAL_W = LAYER_LUTS[NUM_LAYERS-1];

  function automatic int unsigned max_width();
    int unsigned m;
    m = IN_BITS;
    for (int unsigned l = 0; l < NUM_LAYERS; l++) if (LAYER_LUTS[l] > m) m = LAYER_LUTS[l];
    return m;
  endfunction

  localparam int unsigned MAXW = max_width();

  if (NUM_LAYERS < 1 || NUM_LAYERS > MAX_LAYERS) begin : g_bad_layers
    $error("NUM_LAYERS must be 1..MAX_LAYERS");
  end

  // ---------------------------------------------------------------- input
  logic [MAXW-1:0] act [NUM_LAYERS+1];
  logic            vld [NUM_LAYERS+1];
  logic [IN_BITS-1:0] in_bits;

  dwn_input_interface #(
    .BUS_W       (BUS_W),
    .NUM_FEATURES(NUM_FEATURES),
    .Z           (Z)
  ) u_if (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_data  (in_data),
    .out_valid(vld[0]),
    .out_bits (in_bits)
  );

  assign act[0] = MAXW'(in_bits);

  // ------------------------------------------------------------ LUT layers
  for (genvar l = 0; l < int'(NUM_LAYERS); l++) begin : g_layer
    localparam int unsigned W_IN  = (l == 0) ? IN_BITS : LAYER_LUTS[(l == 0) ? 0 : l-1];
    localparam int unsigned W_OUT = LAYER_LUTS[l];
    logic [W_OUT-1:0] y;

    dwn_lut_layer #(
      .N_IN     (W_IN),
      .N_LUTS   (W_OUT),
      .K        (LUT_K),
      .SEED     (layer_seed(SEED, l)),
      .MAP_STYLE(MAP_LEARNED)
    ) u_layer (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (vld[l]),
      .in_bits  (act[l][W_IN-1:0]),
      .out_valid(vld[l+1]),
      .out_bits (y)
    );

    assign act[l+1] = MAXW'(y);
  end

  // ---------------------------------------------------------- output head
  if (HEAD == HEAD_POPCOUNT) begin : g_popcount_head
    localparam int unsigned G       = FINAL_W / NUM_CLASSES;  // nodes per class
    localparam int unsigned SCORE_W = $clog2(G + 1);

    logic [NUM_CLASSES-1:0][SCORE_W-1:0] score_d, score_q;
    logic                                score_vld;
    logic [CLASS_W-1:0]                  best;
    logic [SCORE_W-1:0]                  best_score;

    if (G < 1) begin : g_bad_groups
      $error("final layer narrower than NUM_CLASSES");
    end

    for (genvar c = 0; c < int'(NUM_CLASSES); c++) begin : g_class
      popcount #(
        .N    (G),
        .OUT_W(SCORE_W)
      ) u_pc (
        .bits (act[NUM_LAYERS][c*G +: G]),
        .count(score_d[c])
      );
    end

    argmax #(
      .NUM_CLASSES(NUM_CLASSES),
      .W          (SCORE_W),
      .CLASS_W    (CLASS_W)
    ) u_argmax (
      .scores   (score_q),
      .idx      (best),
      .max_score(best_score)
    );

    always_ff @(posedge clk) begin
      score_q   <= score_d;
      out_class <= best;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        score_vld <= 1'b0;
        out_valid <= 1'b0;
      end else begin
        score_vld <= vld[NUM_LAYERS];
        out_valid <= score_vld;
      end
    end

  end else begin : g_reduction_head
    logic red_bit;

    if (NUM_CLASSES != 2) begin : g_bad_classes
      $error("the reduction head produces a two-class decision");
    end

    dwn_reduction_tree #(
      .IN_W(FINAL_W),
      .K   (LUT_K),
      .SEED(SEED)
    ) u_red (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (vld[NUM_LAYERS]),
      .in_bits  (act[NUM_LAYERS][FINAL_W-1:0]),
      .out_valid(out_valid),
      .out_bit  (red_bit)
    );

    assign out_class = CLASS_W'(red_bit);
  end

endmodule
