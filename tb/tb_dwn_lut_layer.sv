// tb_dwn_lut_layer: streams a new random input vector every cycle (with some
// idle cycles) into a 40-input, 16-node LUT-6 layer and checks each output
// vector, one cycle later, against the reference model; also checks that
// out_valid follows in_valid by exactly one cycle.
module tb_dwn_lut_layer;
  import dwn_pkg::*;
  import dwn_ref_pkg::*;

  localparam int N_IN = 40, N_LUTS = 16, K = 6, SEED = 5;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [N_IN-1:0] in_bits;
  logic out_valid;
  logic [N_LUTS-1:0] out_bits;
  int checks = 0, failures = 0;

  dwn_lut_layer #(.N_IN(N_IN), .N_LUTS(N_LUTS), .K(K), .SEED(SEED), .MAP_STYLE(MAP_LEARNED)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_bits(in_bits),
    .out_valid(out_valid), .out_bits(out_bits));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N_LUTS-1:0] expected;
    logic exp_valid;
    bit iv[];
    bit ov[];
    in_valid = 0;
    in_bits = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_valid = 0;
    expected = '0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      // check what the previous edge captured
      checks++;
      if (out_valid !== exp_valid) begin
        failures++;
        $display("FAIL valid at %0d", it);
      end
      if (exp_valid) begin
        checks++;
        if (out_bits !== expected) begin
          failures++;
          if (failures < 10) $display("FAIL out=%h exp=%h", out_bits, expected);
        end
      end
      // drive the next vector
      in_valid = ($urandom % 5) != 0;
      in_bits  = {$urandom, $urandom};
      iv = new[N_IN];
      for (int b = 0; b < N_IN; b++) iv[b] = in_bits[b];
      eval_layer(iv, N_LUTS, K, SEED, MAP_LEARNED, ov);
      for (int j = 0; j < N_LUTS; j++) expected[j] = ov[j];
      exp_valid = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
