// tb_dwn_accelerator_full: the accelerator at its default size (784
// features, z = 1, 112-bit port so 7 beats per sample, LUT-6 layers of 1000
// and 500 nodes, 10 classes of 50 nodes, popcount + argmax head).
//
// Sends 60 random samples, most of them back to back (one sample every 7
// cycles, the port-limited rate) and some with idle cycles, and checks every
// class against the reference model and its arrival cycle: with the first
// beat in cycle 0 and no gaps, out_valid is high in cycle 11, i.e. 12 cycles
// end to end. The default-seed model is the one the package defines.
module tb_dwn_accelerator_full;
  import dwn_pkg::*;
  import dwn_ref_pkg::*;

  localparam int BW = 112, NF = 784, BEATS = 7, L = 2, C = 10, SEED = 1;
  localparam int unsigned LUTS [2] = '{1000, 500};
  localparam int NSAMPLES = 60;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [BW-1:0] in_data;
  logic out_valid;
  logic [3:0] out_class;

  dwn_accelerator dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .out_valid(out_valid), .out_class(out_class));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, n_out = 0, n_b2b = 0, n_gaps = 0, n_ties = 0;
  int first_beat_cycle = -1, first_out_cycle = -1;
  int classes_seen [C];

  typedef struct { int cycle; int cls; } exp_t;
  exp_t q[$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      if (out_valid) begin
        exp_t e;
        n_out++;
        if (first_out_cycle < 0) first_out_cycle = cyc;
        checks++;
        if (q.size() == 0) begin
          failures++; $display("FAIL unexpected output @%0d", cyc);
        end else begin
          e = q.pop_front();
          if (e.cycle != cyc || int'(out_class) != e.cls) begin
            failures++;
            if (failures < 10) $display("FAIL cyc %0d (exp %0d) class %0d (exp %0d)", cyc, e.cycle, out_class, e.cls);
          end
          classes_seen[e.cls]++;
        end
      end else if (q.size() > 0 && q[0].cycle <= cyc) begin
        failures++; void'(q.pop_front());
        $display("FAIL output missing @%0d", cyc);
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
    logic [BEATS*BW-1:0] s;
    exp_t e;
    foreach (classes_seen[i]) classes_seen[i] = 0;
    in_valid = 0;
    in_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NSAMPLES; n++) begin
      lv = new[NF];
      s = '0;
      for (int f = 0; f < NF; f++) begin
        lv[f] = $urandom % 2;
        s[f] = lv[f][0];
      end
      expand(lv, 1, x);
      a = x;
      for (int l = 0; l < L; l++) begin
        eval_layer(a, LUTS[l], 6, layer_seed(SEED, l), MAP_LEARNED, b);
        a = b;
      end
      e.cls = popcount_head(a, C, scores, tie);
      if (tie) n_ties++;
      for (int bt = 0; bt < BEATS; bt++) begin
        if (n >= 2 && $urandom % 16 == 0) begin
          in_valid = 0;
          n_gaps++;
          @(negedge clk);
        end else if (bt == 0 && n > 0) begin
          n_b2b++;
        end
        in_valid = 1;
        in_data = s[bt*BW +: BW];
        if (n == 0 && bt == 0) first_beat_cycle = cyc;
        if (bt == BEATS - 1) begin
          e.cycle = cyc + 1 + L + 2;
          q.push_back(e);
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (12) @(negedge clk);
    checks += 3;
    if (q.size() != 0) begin failures++; $display("FAIL results outstanding"); end
    if (n_out != NSAMPLES) begin failures++; $display("FAIL outputs %0d", n_out); end
    // first sample had no gaps: 12 cycles from first beat to result, inclusive
    if (first_out_cycle - first_beat_cycle + 1 != 12) begin
      failures++;
      $display("FAIL end-to-end latency %0d cycles", first_out_cycle - first_beat_cycle + 1);
    end
    checks++;
    if (n_b2b == 0 || n_gaps == 0) begin failures++; $display("FAIL b2b=%0d gaps=%0d", n_b2b, n_gaps); end
    $display("latency %0d cycles, back_to_back=%0d gaps=%0d ties=%0d",
             first_out_cycle - first_beat_cycle + 1, n_b2b, n_gaps, n_ties);
    for (int c = 0; c < C; c++) $display("class %0d predicted %0d times", c, classes_seen[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
