// argmax: index of the largest of NUM_CLASSES unsigned scores.
//
// A linear scan keeps the running maximum; a later score replaces it only
// when strictly larger, so ties go to the lowest class index (this design's
// choice; the source only names the function). The winning score is also
// output.
//
// Purely combinational, no clock; the accelerator registers the result.
module argmax #(
  parameter int unsigned NUM_CLASSES = 10,
  parameter int unsigned W           = 6,
  parameter int unsigned CLASS_W     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic [NUM_CLASSES-1:0][W-1:0] scores,
  output logic [CLASS_W-1:0]            idx,
  output logic [W-1:0]                  max_score
);

  always_comb begin
    idx       = '0;
    max_score = scores[0];
    for (int c = 1; c < int'(NUM_CLASSES); c++) begin
      if (scores[c] > max_score) begin
        max_score = scores[c];
        idx       = CLASS_W'(c);
      end
    end
  end

endmodule
