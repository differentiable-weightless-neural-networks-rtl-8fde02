// tb_dwn_reduction_tree: a 16-bit feature vector through a pyramid of LUT-2
// nodes (16 -> 8 -> 4 -> 2 -> 1, four registered levels) and a 20-bit one
// through LUT-6 nodes (20 -> 4 -> 1, with a short last group). A new random
// vector enters most cycles; each output bit must match the reference
// pyramid exactly LEVELS cycles later, and both output values must occur.
module tb_dwn_reduction_tree;
  import dwn_ref_pkg::*;

  localparam int W2 = 16, L2 = 4;
  localparam int W6 = 20, L6 = 2;
  localparam int SEED = 4;

  logic clk = 0, rst_n = 0;
  logic iv;
  logic [W2-1:0] i2;
  logic [W6-1:0] i6;
  logic ov2, ob2, ov6, ob6;
  int checks = 0, failures = 0, ones2 = 0, zeros2 = 0;

  dwn_reduction_tree #(.IN_W(W2), .K(2), .SEED(SEED)) dut2 (
    .clk(clk), .rst_n(rst_n), .in_valid(iv), .in_bits(i2), .out_valid(ov2), .out_bit(ob2));
  dwn_reduction_tree #(.IN_W(W6), .K(6), .SEED(SEED)) dut6 (
    .clk(clk), .rst_n(rst_n), .in_valid(iv), .in_bits(i6), .out_valid(ov6), .out_bit(ob6));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expectation pipelines indexed by cycle
  bit exp_v2 [0:1023];
  bit exp_b2 [0:1023];
  bit exp_v6 [0:1023];
  bit exp_b6 [0:1023];

  initial begin
    bit v2[];
    bit v6[];
    iv = 0; i2 = '0; i6 = '0;
    for (int c = 0; c < 1024; c++) begin exp_v2[c] = 0; exp_v6[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      // outputs now reflect the edge that ended cycle cyc-1
      if (cyc > 0) begin
        checks += 2;
        if (ov2 !== exp_v2[cyc-1]) begin failures++; $display("FAIL v2 @%0d", cyc); end
        if (ov6 !== exp_v6[cyc-1]) begin failures++; $display("FAIL v6 @%0d", cyc); end
        if (exp_v2[cyc-1]) begin
          checks++;
          if (ob2 !== exp_b2[cyc-1]) begin failures++; if (failures < 10) $display("FAIL b2 @%0d", cyc); end
          if (exp_b2[cyc-1]) ones2++; else zeros2++;
        end
        if (exp_v6[cyc-1]) begin
          checks++;
          if (ob6 !== exp_b6[cyc-1]) begin failures++; if (failures < 10) $display("FAIL b6 @%0d", cyc); end
        end
      end
      iv = (cyc < 580) && ($urandom % 4 != 0);
      i2 = W2'($urandom);
      i6 = W6'($urandom);
      v2 = new[W2];
      v6 = new[W6];
      for (int b = 0; b < W2; b++) v2[b] = i2[b];
      for (int b = 0; b < W6; b++) v6[b] = i6[b];
      exp_v2[cyc + L2 - 1] = iv;
      exp_b2[cyc + L2 - 1] = reduction_head(v2, 2, SEED);
      exp_v6[cyc + L6 - 1] = iv;
      exp_b6[cyc + L6 - 1] = reduction_head(v6, 6, SEED);
    end
    checks++;
    if (ones2 == 0 || zeros2 == 0) begin
      failures++;
      $display("FAIL output stuck: ones=%0d zeros=%0d", ones2, zeros2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
