// dwn_lut_layer: one layer of RAM nodes with its input interconnect and
// output registers.
//
// Every node j takes K bits of the previous layer, chosen by the learned
// mapping (dwn_pkg::map_index), as its address, and looks up one bit in its
// table (dwn_pkg::table_init). After training the mapping is constant, so the
// interconnect is plain wiring: no multiplexers, no arithmetic. Each node
// output is captured in a flip-flop, so a layer adds exactly one cycle of
// latency and accepts a new input vector every cycle.
//
// Interface: in_valid/in_bits are sampled on every rising edge; out_bits and
// out_valid appear one cycle later. Only out_valid is reset (active-low
// rst_n); data registers are not, which is this design's choice.
module dwn_lut_layer
  import dwn_pkg::*;
#(
  parameter int unsigned N_IN      = 16,          // bits from the previous layer
  parameter int unsigned N_LUTS    = 8,           // nodes in this layer
  parameter int unsigned K         = 6,           // inputs per node
  parameter int unsigned SEED      = 1,           // selects this layer's model contents
  parameter map_style_e  MAP_STYLE = MAP_LEARNED  // interconnect pattern
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N_IN-1:0]   in_bits,
  output logic              out_valid,
  output logic [N_LUTS-1:0] out_bits
);

  if (K < 2 || K > MAX_K) begin : g_bad_k
    $error("dwn_lut_layer supports 2 <= K <= 6");
  end

  logic [N_LUTS-1:0] node_y;

  for (genvar j = 0; j < int'(N_LUTS); j++) begin : g_node
    localparam logic [63:0] TABLE = table_init(SEED, j);
    logic [K-1:0] addr;

    // Learned interconnect: fixed wires from the previous layer.
    for (genvar k = 0; k < int'(K); k++) begin : g_in
      localparam int unsigned IDX = map_index(SEED, MAP_STYLE, j, k, K, N_IN);
      assign addr[k] = in_bits[IDX];
    end

    ram_node #(
      .K   (K),
      .INIT(TABLE[(1<<K)-1:0])
    ) u_node (
      .addr(addr),
      .y   (node_y[j])
    );
  end

  always_ff @(posedge clk) begin
    out_bits <= node_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
