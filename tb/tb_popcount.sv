// tb_popcount: compares the adder-tree popcount with a bit-by-bit count for
// the 12-input tree of the reference figure, a 50-input (one class of the
// default model) and a 1-input instance, on all-zero, all-one and random
// vectors.
module tb_popcount;
  logic [11:0] b12;  logic [3:0] c12;
  logic [49:0] b50;  logic [5:0] c50;
  logic [0:0]  b1;   logic [0:0] c1;
  int checks = 0, failures = 0;

  popcount #(.N(12)) dut12 (.bits(b12), .count(c12));
  popcount #(.N(50)) dut50 (.bits(b50), .count(c50));
  popcount #(.N(1))  dut1  (.bits(b1),  .count(c1));

  function automatic int ones(input logic [63:0] v, input int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += v[i];
    return s;
  endfunction

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    b12 = '0; b50 = '0; b1 = '0; #1;
    check(c12, 0, "12 zero"); check(c50, 0, "50 zero"); check(c1, 0, "1 zero");
    b12 = '1; b50 = '1; b1 = '1; #1;
    check(c12, 12, "12 ones"); check(c50, 50, "50 ones"); check(c1, 1, "1 one");
    for (int it = 0; it < 3000; it++) begin
      logic [63:0] r;
      r = {$urandom, $urandom};
      if (it % 4 == 1) r = r & {$urandom, $urandom};  // sparser
      if (it % 4 == 2) r = r | {$urandom, $urandom};  // denser
      b12 = r[11:0];
      b50 = r[49:0];
      #1;
      check(c12, ones(r, 12), "12 rand");
      check(c50, ones(r, 50), "50 rand");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
