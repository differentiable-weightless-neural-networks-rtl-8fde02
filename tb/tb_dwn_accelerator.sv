// tb_dwn_accelerator: end-to-end test of the accelerator at reduced size,
// with both output heads.
//
// dut_p: popcount head. 20 features, z = 3, 32-bit port (2 beats/sample),
//        LUT-6 layers of 48 and 30 nodes, 3 classes of 10 nodes each.
// dut_r: learnable-reduction head on the same stream. LUT-2 layers of 24 and
//        12 nodes, then a LUT-2 pyramid 12 -> 6 -> 3 -> 2 -> 1, two classes.
// Random samples are sent with random idle cycles inside and between samples
// and often back to back. For every sample the reference model predicts the
// class; each result must appear exactly in the cycle the pipeline depth
// gives (last beat cycle + 1 + layers + 2 for the popcount head, + 1 + layers
// + pyramid levels for the reduction head), in order, with no extra outputs.
// Counted mechanisms, each of which must occur: multi-beat samples, idle
// gaps, back-to-back samples, intermediate thermometer levels, argmax ties,
// and both reduction-head decisions.
module tb_dwn_accelerator;
  import dwn_pkg::*;
  import dwn_ref_pkg::*;

  localparam int BW = 32, NF = 20, Z = 3, LW = 2, BEATS = 2;
  localparam int SEED = 5;
  // popcount-head instance
  localparam int KP = 6, LP = 2, CP = 3;
  localparam int unsigned LUTS_P [MAX_LAYERS] = '{48, 30, 0, 0, 0, 0, 0, 0};
  // reduction-head instance
  localparam int KR = 2, LR = 2, RED_LEVELS = 4;
  localparam int unsigned LUTS_R [MAX_LAYERS] = '{24, 12, 0, 0, 0, 0, 0, 0};
  localparam int NSAMPLES = 400;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [BW-1:0] in_data;
  logic ov_p, ov_r;
  logic [1:0] cls_p;
  logic [0:0] cls_r;

  dwn_accelerator #(
    .BUS_W(BW), .NUM_FEATURES(NF), .Z(Z), .LUT_K(KP), .NUM_LAYERS(LP),
    .LAYER_LUTS(LUTS_P), .NUM_CLASSES(CP), .HEAD(HEAD_POPCOUNT), .SEED(SEED)
  ) dut_p (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .out_valid(ov_p), .out_class(cls_p));

  dwn_accelerator #(
    .BUS_W(BW), .NUM_FEATURES(NF), .Z(Z), .LUT_K(KR), .NUM_LAYERS(LR),
    .LAYER_LUTS(LUTS_R), .NUM_CLASSES(2), .HEAD(HEAD_REDUCTION), .SEED(SEED)
  ) dut_r (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .out_valid(ov_r), .out_class(cls_r));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_multibeat = 0, n_gaps = 0, n_b2b = 0, n_midlevel = 0, n_ties = 0;
  int n_red0 = 0, n_red1 = 0, n_out_p = 0, n_out_r = 0;

  typedef struct { int cycle; int cls; } exp_t;
  exp_t q_p[$];
  exp_t q_r[$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitors
  always @(negedge clk) begin
    if (rst_n) begin
      if (ov_p) begin
        n_out_p++;
        checks++;
        if (q_p.size() == 0) begin
          failures++; $display("FAIL unexpected popcount-head output @%0d", cyc);
        end else begin
          exp_t e;
          e = q_p.pop_front();
          if (e.cycle != cyc || int'(cls_p) != e.cls) begin
            failures++;
            if (failures < 10) $display("FAIL p: cyc %0d (exp %0d) class %0d (exp %0d)", cyc, e.cycle, cls_p, e.cls);
          end
        end
      end else if (q_p.size() > 0 && q_p[0].cycle <= cyc) begin
        failures++; void'(q_p.pop_front());
        $display("FAIL popcount-head output missing @%0d", cyc);
      end
      if (ov_r) begin
        n_out_r++;
        checks++;
        if (q_r.size() == 0) begin
          failures++; $display("FAIL unexpected reduction-head output @%0d", cyc);
        end else begin
          exp_t e;
          e = q_r.pop_front();
          if (e.cycle != cyc || int'(cls_r) != e.cls) begin
            failures++;
            if (failures < 10) $display("FAIL r: cyc %0d (exp %0d) class %0d (exp %0d)", cyc, e.cycle, cls_r, e.cls);
          end
        end
      end else if (q_r.size() > 0 && q_r[0].cycle <= cyc) begin
        failures++; void'(q_r.pop_front());
        $display("FAIL reduction-head output missing @%0d", cyc);
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
    in_valid = 0;
    in_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NSAMPLES; n++) begin
      // sample
      lv = new[NF];
      s = '0;
      for (int f = 0; f < NF; f++) begin
        lv[f] = $urandom % (Z + 1);
        if (lv[f] > 0 && lv[f] < Z) n_midlevel++;
        s[f*LW +: LW] = LW'(lv[f]);
      end
      expand(lv, Z, x);
      // popcount-head reference
      a = x;
      for (int l = 0; l < LP; l++) begin
        eval_layer(a, LUTS_P[l], KP, layer_seed(SEED, l), MAP_LEARNED, b);
        a = b;
      end
      e.cls = popcount_head(a, CP, scores, tie);
      if (tie) n_ties++;
      // reduction-head reference
      a = x;
      for (int l = 0; l < LR; l++) begin
        eval_layer(a, LUTS_R[l], KR, layer_seed(SEED, l), MAP_LEARNED, b);
        a = b;
      end
      // send beats
      if (BEATS > 1) n_multibeat++;
      for (int bt = 0; bt < BEATS; bt++) begin
        if ($urandom % 4 == 0) begin
          in_valid = 0;
          in_data = BW'($urandom);
          n_gaps++;
          @(negedge clk);
        end else if (bt == 0 && n > 0) begin
          n_b2b++;
        end
        in_valid = 1;
        in_data = s[bt*BW +: BW];
        if (bt == BEATS - 1) begin
          e.cycle = cyc + 1 + LP + 2;
          q_p.push_back(e);
          e.cls = int'(reduction_head(a, KR, SEED));
          if (e.cls != 0) n_red1++; else n_red0++;
          e.cycle = cyc + 1 + LR + RED_LEVELS;
          q_r.push_back(e);
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (12) @(negedge clk);
    checks += 3;
    if (q_p.size() != 0 || q_r.size() != 0) begin failures++; $display("FAIL results outstanding"); end
    if (n_out_p != NSAMPLES) begin failures++; $display("FAIL popcount outputs %0d", n_out_p); end
    if (n_out_r != NSAMPLES) begin failures++; $display("FAIL reduction outputs %0d", n_out_r); end
    $display("mechanisms: multibeat=%0d gaps=%0d back_to_back=%0d mid_levels=%0d ties=%0d red0=%0d red1=%0d",
             n_multibeat, n_gaps, n_b2b, n_midlevel, n_ties, n_red0, n_red1);
    checks += 7;
    if (n_multibeat == 0) begin failures++; $display("FAIL no multi-beat sample"); end
    if (n_gaps == 0)      begin failures++; $display("FAIL no idle gap"); end
    if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back samples"); end
    if (n_midlevel == 0)  begin failures++; $display("FAIL no intermediate level"); end
    if (n_ties == 0)      begin failures++; $display("FAIL no argmax tie"); end
    if (n_red0 == 0)      begin failures++; $display("FAIL reduction head never 0"); end
    if (n_red1 == 0)      begin failures++; $display("FAIL reduction head never 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
