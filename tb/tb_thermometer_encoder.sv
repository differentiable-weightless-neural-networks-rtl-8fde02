// tb_thermometer_encoder: checks T(q) = (q > t_1, ..., q > t_z) for random
// values against random ordered thresholds, including values equal to a
// threshold (strict comparison), and the fixed 0..z-1 thresholds used for
// decompression.
module tb_thermometer_encoder;
  localparam int Z = 8;
  localparam int QW = 8;

  logic [QW-1:0]       q;
  logic [Z-1:0][QW-1:0] thr;
  logic [Z-1:0]        t;
  int checks = 0, failures = 0;

  thermometer_encoder #(.Z(Z), .Q_W(QW)) dut (.q(q), .thresholds(thr), .t(t));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int base;
      logic [Z-1:0] exp_t;
      base = 0;
      // ordered thresholds with random steps
      for (int i = 0; i < Z; i++) begin
        base += 1 + ($urandom % 30);
        thr[i] = QW'(base > 255 ? 255 : base);
      end
      if (it % 3 == 0) q = thr[$urandom % Z];   // exactly on a threshold
      else             q = QW'($urandom);
      #1;
      for (int i = 0; i < Z; i++) exp_t[i] = (int'(q) > int'(thr[i]));
      checks++;
      if (t !== exp_t) begin
        failures++;
        if (failures < 10) $display("FAIL q=%0d t=%b exp=%b", q, t, exp_t);
      end
    end
    // fixed integer thresholds: level -> unary code
    for (int i = 0; i < Z; i++) thr[i] = QW'(i);
    for (int lv = 0; lv <= Z + 2; lv++) begin
      q = QW'(lv);
      #1;
      checks++;
      if (t !== Z'((1 << (lv > Z ? Z : lv)) - 1)) begin
        failures++;
        $display("FAIL level %0d -> %b", lv, t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
