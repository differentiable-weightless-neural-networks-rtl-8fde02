// dwn_reduction_tree: learnable-reduction output head.
//
// Instead of counting ones per class and taking the argmax, a DWN can learn
// the reduction itself: a pyramid of LUT layers, each K times narrower than
// the one before, ends in a single node whose bit is the output class (a
// two-class decision). Level l has ceil(w_l / K) nodes; node j of a level
// reads bits j*K .. j*K+K-1 of the level below, the regular tree wiring of the
// pyramid (a short last group re-reads its last bit). Each level is a
// dwn_lut_layer, so it is registered and the head adds LEVELS cycles of
// latency while still accepting a vector every cycle.
//
// Interface: in_valid/in_bits in, out_valid/out_bit LEVELS cycles later.
module dwn_reduction_tree
  import dwn_pkg::*;
#(
  parameter int unsigned IN_W = 64,  // width of the final feature vector
  parameter int unsigned K    = 2,   // inputs per pyramid node
  parameter int unsigned SEED = 1    // model seed (see dwn_pkg::reduction_seed)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [IN_W-1:0] in_bits,
  output logic            out_valid,
  output logic            out_bit
);

  localparam int unsigned LEVELS = reduce_levels(IN_W, K);

  if (IN_W < 2) begin : g_bad_w
    $error("dwn_reduction_tree needs IN_W >= 2");
  end

  logic [IN_W-1:0] act [LEVELS+1];
  logic            vld [LEVELS+1];

  assign act[0] = in_bits;
  assign vld[0] = in_valid;

  for (genvar l = 0; l < int'(LEVELS); l++) begin : g_level
    localparam int unsigned W_IN  = level_width(IN_W, K, l);
    localparam int unsigned W_OUT = level_width(IN_W, K, l + 1);
    logic [W_OUT-1:0] y;

    dwn_lut_layer #(
      .N_IN     (W_IN),
      .N_LUTS   (W_OUT),
      .K        (K),
      .SEED     (reduction_seed(SEED, l)),
      .MAP_STYLE(MAP_TREE)
    ) u_layer (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (vld[l]),
      .in_bits  (act[l][W_IN-1:0]),
      .out_valid(vld[l+1]),
      .out_bits (y)
    );

    assign act[l+1] = IN_W'(y);
  end

  assign out_valid = vld[LEVELS];
  assign out_bit   = act[LEVELS][0];

endmodule
