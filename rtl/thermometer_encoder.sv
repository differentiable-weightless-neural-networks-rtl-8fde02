// thermometer_encoder: unary ("thermometer") encoding of one feature.
//
// Output bit i is 1 when the feature value q is strictly greater than
// threshold i, so for ordered thresholds the code is a run of ones from bit 0
// upward whose length grows with q: T(q) = (q > t_1, q > t_2, ..., q > t_z).
// This is the encoding definition the DWN model is trained on. Thresholds come
// in on a port so the same block serves fixed-threshold decompression (the
// input interface ties them to 0, 1, ..., Z-1) and runtime-programmable
// encoding. Values are unsigned integers of Q_W bits (this design's choice;
// the model itself is defined over reals).
//
// Purely combinational, no clock.
module thermometer_encoder #(
  parameter int unsigned Z   = 1,  // bits in the code (z)
  parameter int unsigned Q_W = 8   // width of value and thresholds
) (
  input  logic [Q_W-1:0]        q,
  input  logic [Z-1:0][Q_W-1:0] thresholds,  // thresholds[i] = t_{i+1}
  output logic [Z-1:0]          t
);

  always_comb begin
    for (int i = 0; i < int'(Z); i++) t[i] = (q > thresholds[i]);
  end

endmodule
