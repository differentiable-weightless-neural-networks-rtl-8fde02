// popcount: number of ones among N input bits.
//
// Built as the adder tree of the source architecture's 12:4 example, down to
// the individual half and full adders. The first level passes trios of input
// bits through full adders, giving ceil(N/3) two-bit partial sums (carry =
// majority, sum = parity). The partial sums are then added pairwise in a
// balanced binary tree. An adder at tree level d (leaves are level 0) adds
// two (d+1)-bit operands as a ripple chain of one half adder (bit 0) and d
// full adders, producing a (d+2)-bit sum. For N = 12 this is 4 + 2 + 2 = 8
// full adders and 3 half adders, as in the source. The tree is stored
// heap-style: leaves sit at node[P .. 2P-1] and node[i] sums node[2i] and
// node[2i+1]. When ceil(N/3) is not a power of two the tree is padded with
// constant-zero leaves, which synthesis removes; the input is zero-padded
// to a whole number of trios. Both padding rules are this design's.
//
// Purely combinational, no clock; the accelerator registers the result.
module popcount #(
  parameter int unsigned N     = 12,
  parameter int unsigned OUT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]     bits,
  output logic [OUT_W-1:0] count
);

  localparam int unsigned TRIOS  = (N + 2) / 3;
  localparam int unsigned LEVELS = $clog2(TRIOS);
  localparam int unsigned P      = 1 << LEVELS;            // padded leaf count
  localparam int unsigned TW     = LEVELS + 2;             // root sum width

  logic [3*TRIOS-1:0] padded;
  logic [TW-1:0]      node [1:2*P-1];

  assign padded = {{(3*TRIOS-N){1'b0}}, bits};

  always_comb begin
    logic a, b, c;
    // Level 0: one full adder per trio.
    for (int i = 0; i < int'(P); i++) begin
      node[P+i] = '0;
      if (i < int'(TRIOS)) begin
        a = padded[3*i];
        b = padded[3*i+1];
        c = padded[3*i+2];
        node[P+i][0] = a ^ b ^ c;
        node[P+i][1] = (a & b) | (c & (a ^ b));
      end
    end
    // Levels 1 .. LEVELS: ripple adders of one half adder and d full adders.
    for (int d = 1; d <= int'(LEVELS); d++) begin
      for (int i = int'(P) >> d; i < (int'(P) >> (d - 1)); i++) begin
        node[i] = '0;
        c = 1'b0;
        for (int k = 0; k <= d; k++) begin
          a = node[2*i][k];
          b = node[2*i+1][k];
          node[i][k] = a ^ b ^ c;
          c = (a & b) | (c & (a ^ b));
        end
        node[i][d+1] = c;
      end
    end
    count = OUT_W'(node[1]);
  end

endmodule
