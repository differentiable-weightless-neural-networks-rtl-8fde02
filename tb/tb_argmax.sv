// tb_argmax: random score vectors with frequent ties over 10 classes; the
// expected index is the lowest index holding the maximum.
module tb_argmax;
  localparam int C = 10, W = 6;
  logic [C-1:0][W-1:0] scores;
  logic [3:0] idx;
  logic [W-1:0] mx;
  int checks = 0, failures = 0, ties = 0;

  argmax #(.NUM_CLASSES(C), .W(W)) dut (.scores(scores), .idx(idx), .max_score(mx));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int best, n_best;
      for (int c = 0; c < C; c++)
        scores[c] = (it % 2) ? W'($urandom % 4 + 40) : W'($urandom);
      #1;
      best = 0;
      for (int c = 1; c < C; c++) if (scores[c] > scores[best]) best = c;
      n_best = 0;
      for (int c = 0; c < C; c++) if (scores[c] == scores[best]) n_best++;
      if (n_best > 1) ties++;
      checks++;
      if (int'(idx) != best || mx != scores[best]) begin
        failures++;
        if (failures < 10) $display("FAIL idx=%0d exp=%0d", idx, best);
      end
    end
    checks++;
    if (ties == 0) begin
      failures++;
      $display("FAIL no ties exercised");
    end
    $display("ties exercised: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
