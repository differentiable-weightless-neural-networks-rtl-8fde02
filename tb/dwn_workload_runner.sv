// dwn_workload_runner: drives one dwn_accelerator configuration with random
// compressed samples sent back to back and checks every result (class and
// arrival cycle) against the reference model. Used by tb_dwn_workloads to run
// the evaluated model sizes side by side.
//
// Parameters mirror the accelerator's. Ports: clk and rst_n in; done rises
// when all NSAMPLES results have been checked; checks/failures count the
// comparisons made.
module dwn_workload_runner
  import dwn_pkg::*;
  import dwn_ref_pkg::*;
#(
  parameter string       NAME                    = "workload",
  parameter int unsigned BUS_W                   = 112,
  parameter int unsigned NUM_FEATURES            = 16,
  parameter int unsigned Z                       = 1,
  parameter int unsigned LUT_K                   = 6,
  parameter int unsigned NUM_LAYERS              = 1,
  parameter int unsigned LAYER_LUTS [MAX_LAYERS] = '{10, 0, 0, 0, 0, 0, 0, 0},
  parameter int unsigned NUM_CLASSES             = 5,
  parameter head_e       HEAD                    = HEAD_POPCOUNT,
  parameter int unsigned SEED                    = 1,
  parameter int unsigned NSAMPLES                = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int unsigned LEVEL_W = $clog2(Z + 1);
  localparam int unsigned SAMPLE_W = NUM_FEATURES * LEVEL_W;
  localparam int unsigned BEATS = (SAMPLE_W + BUS_W - 1) / BUS_W;
  localparam int unsigned CLASS_W = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1;
  localparam int unsigned FINAL_W = LAYER_LUTS[NUM_LAYERS-1];
  localparam int unsigned HEAD_DEPTH = (HEAD == HEAD_POPCOUNT) ? 2 : reduce_levels(FINAL_W, LUT_K);

  logic               in_valid;
  logic [BUS_W-1:0]   in_data;
  logic               out_valid;
  logic [CLASS_W-1:0] out_class;

  dwn_accelerator #(
    .BUS_W(BUS_W), .NUM_FEATURES(NUM_FEATURES), .Z(Z), .LUT_K(LUT_K),
    .NUM_LAYERS(NUM_LAYERS), .LAYER_LUTS(LAYER_LUTS), .NUM_CLASSES(NUM_CLASSES),
    .HEAD(HEAD), .SEED(SEED)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .out_valid(out_valid), .out_class(out_class));

  typedef struct { int cycle; int cls; } exp_t;
  exp_t q[$];
  int cyc = 0;
  int n_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      n_out++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("%s: FAIL unexpected output", NAME);
      end else begin
        e = q.pop_front();
        if (e.cycle != cyc || int'(out_class) != e.cls) begin
          failures++;
          $display("%s: FAIL cycle %0d (exp %0d) class %0d (exp %0d)", NAME, cyc, e.cycle, out_class, e.cls);
        end
      end
    end
  end

  initial begin
    int unsigned lv[];
    bit x[];
    bit a[];
    bit b[];
    int unsigned scores[];
    bit tie;
    logic [BEATS*BUS_W-1:0] s;
    exp_t e;
    done = 0;
    checks = 0;
    failures = 0;
    in_valid = 0;
    in_data = '0;
    @(posedge rst_n);
    @(negedge clk);
    for (int n = 0; n < int'(NSAMPLES); n++) begin
      lv = new[NUM_FEATURES];
      s = '0;
      for (int f = 0; f < int'(NUM_FEATURES); f++) begin
        lv[f] = $urandom % (Z + 1);
        s[f*LEVEL_W +: LEVEL_W] = LEVEL_W'(lv[f]);
      end
      expand(lv, Z, x);
      a = x;
      for (int l = 0; l < int'(NUM_LAYERS); l++) begin
        eval_layer(a, LAYER_LUTS[l], LUT_K, layer_seed(SEED, l), MAP_LEARNED, b);
        a = b;
      end
      if (HEAD == HEAD_POPCOUNT) e.cls = popcount_head(a, NUM_CLASSES, scores, tie);
      else                       e.cls = int'(reduction_head(a, LUT_K, SEED));
      for (int bt = 0; bt < int'(BEATS); bt++) begin
        in_valid = 1;
        in_data = s[bt*BUS_W +: BUS_W];
        if (bt == int'(BEATS) - 1) begin
          e.cycle = cyc + 1 + NUM_LAYERS + HEAD_DEPTH;
          q.push_back(e);
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (NUM_LAYERS + HEAD_DEPTH + 4) @(negedge clk);
    checks++;
    if (n_out != int'(NSAMPLES) || q.size() != 0) begin
      failures++;
      $display("%s: FAIL %0d of %0d results", NAME, n_out, NSAMPLES);
    end
    $display("%s: %0d samples, %0d beats each, %0d-cycle latency, failures=%0d",
             NAME, NSAMPLES, BEATS, BEATS + NUM_LAYERS + HEAD_DEPTH + 1, failures);
    done = 1;
  end

endmodule
