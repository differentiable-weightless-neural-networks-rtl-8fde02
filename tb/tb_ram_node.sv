// tb_ram_node: reads every address of a LUT-6 and a LUT-2 node and compares
// with the stored bit INIT[address].
module tb_ram_node;
  localparam logic [63:0] INIT6 = 64'hB3C5_0F1E_96A7_2D48;
  localparam logic [3:0]  INIT2 = 4'b0110;  // XOR

  logic [5:0] a6;
  logic [1:0] a2;
  logic       y6, y2;
  int checks = 0, failures = 0;

  ram_node #(.K(6), .INIT(INIT6)) dut6 (.addr(a6), .y(y6));
  ram_node #(.K(2), .INIT(INIT2)) dut2 (.addr(a2), .y(y2));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      a6 = 6'(a);
      #1;
      checks++;
      if (y6 !== INIT6[a]) begin
        failures++;
        $display("FAIL K=6 addr %0d y=%b exp=%b", a, y6, INIT6[a]);
      end
    end
    for (int a = 0; a < 4; a++) begin
      a2 = 2'(a);
      #1;
      checks++;
      if (y2 !== ((a & 1) ^ (a >> 1))) begin
        failures++;
        $display("FAIL K=2 addr %0d y=%b", a, y2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
