// ram_node: one K-input weightless RAM node (a lookup table, "LUT-K").
//
// The K address bits select one of 2^K stored bits. The table is built the
// way an FPGA LUT-6 is drawn in the source architecture: two LUT-(K-1)
// halves share the low K-1 address bits and a 2:1 multiplexer, steered by the
// top address bit, picks one of their outputs. Contents are fixed at
// elaboration by INIT (INIT[a] is the output for address a), as the trained
// contents of a deployed model are.
//
// Combinational, no clock; the enclosing layer registers the output.
module ram_node #(
  parameter int unsigned         K    = 6,   // inputs per node (n)
  parameter logic [(1<<K)-1:0]   INIT = '0   // stored bits
) (
  input  logic [K-1:0] addr,
  output logic         y
);

  localparam int unsigned HALF = 1 << (K - 1);
  localparam logic [HALF-1:0] INIT_LO = INIT[HALF-1:0];
  localparam logic [HALF-1:0] INIT_HI = INIT[2*HALF-1:HALF];

  if (K < 2) begin : g_bad_k
    $error("ram_node needs K >= 2");
  end

  logic lut_lo, lut_hi;

  always_comb begin
    lut_lo = INIT_LO[addr[K-2:0]];
    lut_hi = INIT_HI[addr[K-2:0]];
    y      = addr[K-1] ? lut_hi : lut_lo;
  end

endmodule
