// dwn_input_interface: input port, sample buffer and thermometer
// decompression in front of the first LUT layer.
//
// The device pins deliver BUS_W bits per cycle (112 on the reference FPGA
// board). Sending every thermometer bit would waste that bandwidth, so each
// feature is sent compressed as its thermometer level: the number of ones in
// its z-bit code, a LEVEL_W = ceil(log2(z+1))-bit integer. One sample is
// NUM_FEATURES * LEVEL_W bits, sent as BEATS consecutive beats (the last one
// zero-padded). Feature f occupies sample bits [f*LEVEL_W +: LEVEL_W] and beat
// b carries sample bits [b*BUS_W +: BUS_W]. This packing and the level code are
// this design's reading of the "compression scheme" the source adopts but does
// not spell out.
//
// The first BEATS-1 beats are held in a buffer. When the last beat arrives
// the whole sample is decompressed in the same cycle, one thermometer_encoder
// per feature with thresholds 0, 1, ..., z-1 (bit i = level > i), and
// registered. The expanded vector (feature f at bits [f*Z +: Z]) and
// out_valid appear one cycle after the last beat. A beat counter tracks the
// position; in_valid low simply pauses it, so beats need not be consecutive.
// There is no ready signal: the datapath behind this block accepts a sample
// every cycle, so the port never has to stall.
module dwn_input_interface #(
  parameter int unsigned BUS_W        = 112,  // input bits per cycle
  parameter int unsigned NUM_FEATURES = 784,  // features per sample
  parameter int unsigned Z            = 1,    // thermometer bits per feature
  parameter int unsigned LEVEL_W      = $clog2(Z + 1),
  parameter int unsigned SAMPLE_W     = NUM_FEATURES * LEVEL_W,
  parameter int unsigned BEATS        = (SAMPLE_W + BUS_W - 1) / BUS_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [BUS_W-1:0]          in_data,
  output logic                      out_valid,
  output logic [NUM_FEATURES*Z-1:0] out_bits
);

  localparam int unsigned CNT_W = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [CNT_W-1:0]         beat_cnt;
  logic                     last_beat;
  logic [BEATS*BUS_W-1:0]   sample;
  logic [NUM_FEATURES*Z-1:0] expanded;

  assign last_beat = in_valid && (beat_cnt == CNT_W'(BEATS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         beat_cnt <= '0;
    else if (last_beat) beat_cnt <= '0;
    else if (in_valid)  beat_cnt <= beat_cnt + 1'b1;
  end

  if (BEATS > 1) begin : g_buffer
    logic [(BEATS-1)*BUS_W-1:0] buffer;
    always_ff @(posedge clk) begin
      if (in_valid && !last_beat) buffer[beat_cnt*BUS_W +: BUS_W] <= in_data;
    end
    assign sample = {in_data, buffer};
  end else begin : g_single
    assign sample = in_data;
  end

  // Decompression: level -> thermometer code, per feature.
  for (genvar f = 0; f < int'(NUM_FEATURES); f++) begin : g_feat
    logic [Z-1:0][LEVEL_W-1:0] thr;
    for (genvar i = 0; i < int'(Z); i++) begin : g_thr
      assign thr[i] = LEVEL_W'(i);
    end
    thermometer_encoder #(
      .Z  (Z),
      .Q_W(LEVEL_W)
    ) u_therm (
      .q         (sample[f*LEVEL_W +: LEVEL_W]),
      .thresholds(thr),
      .t         (expanded[f*Z +: Z])
    );
  end

  always_ff @(posedge clk) begin
    if (last_beat) out_bits <= expanded;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= last_beat;
  end

  // A buffered beat must land inside the buffer.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> int'(beat_cnt) < int'(BEATS))
    else $error("beat counter out of range");

endmodule
