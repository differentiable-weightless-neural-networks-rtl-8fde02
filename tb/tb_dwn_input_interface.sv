// tb_dwn_input_interface: sends compressed samples over a narrow port and
// checks the decompressed thermometer vectors.
//
// Instance A: 10 features, z = 3 (2-bit levels), 16-bit port, so one sample
// is two beats; beats and samples are separated by random idle cycles or sent
// back to back. Instance B: 5 features, z = 1, one beat per sample. For each
// sample the expected vector is built from the levels by the reference model;
// out_valid must rise exactly one cycle after the last beat and at no other
// time.
module tb_dwn_input_interface;
  import dwn_ref_pkg::*;

  localparam int BW = 16;
  localparam int NFA = 10, ZA = 3, LWA = 2, BEATSA = 2;
  localparam int NFB = 5,  ZB = 1;

  logic clk = 0, rst_n = 0;
  logic va, vb;
  logic [BW-1:0] da, db;
  logic ova, ovb;
  logic [NFA*ZA-1:0] oa;
  logic [NFB*ZB-1:0] ob;
  int checks = 0, failures = 0, gaps = 0, back_to_back = 0;

  dwn_input_interface #(.BUS_W(BW), .NUM_FEATURES(NFA), .Z(ZA)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(va), .in_data(da), .out_valid(ova), .out_bits(oa));
  dwn_input_interface #(.BUS_W(BW), .NUM_FEATURES(NFB), .Z(ZB)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .in_data(db), .out_valid(ovb), .out_bits(ob));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expectations for the edge that follows the current drive
  logic              exp_va, exp_vb;
  logic [NFA*ZA-1:0] exp_a;
  logic [NFB*ZB-1:0] exp_b;

  task automatic step();
    @(negedge clk);
    checks += 2;
    if (ova !== exp_va) begin failures++; $display("FAIL A valid"); end
    if (ovb !== exp_vb) begin failures++; $display("FAIL B valid"); end
    if (exp_va) begin
      checks++;
      if (oa !== exp_a) begin failures++; if (failures < 10) $display("FAIL A %h exp %h", oa, exp_a); end
    end
    if (exp_vb) begin
      checks++;
      if (ob !== exp_b) begin failures++; if (failures < 10) $display("FAIL B %h exp %h", ob, exp_b); end
    end
  endtask

  initial begin
    int unsigned lv_a[];
    int unsigned lv_b[];
    bit ex[];
    logic [BEATSA*BW-1:0] sa;
    va = 0; vb = 0; da = '0; db = '0;
    exp_va = 0; exp_vb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 300; s++) begin
      lv_a = new[NFA];
      lv_b = new[NFB];
      sa = '0;
      for (int f = 0; f < NFA; f++) begin
        lv_a[f] = $urandom % (ZA + 1);
        sa[f*LWA +: LWA] = LWA'(lv_a[f]);
      end
      for (int f = 0; f < NFB; f++) lv_b[f] = $urandom % 2;
      for (int b = 0; b < BEATSA; b++) begin
        if ($urandom % 3 == 0) begin   // idle cycle before this beat
          va = 0; vb = 0; da = BW'($urandom); db = BW'($urandom);
          exp_va = 0; exp_vb = 0;
          gaps++;
          step();
        end else if (b == 0 && s > 0) begin
          back_to_back++;
        end
        va = 1;
        da = sa[b*BW +: BW];
        exp_va = (b == BEATSA - 1);
        if (exp_va) begin
          expand(lv_a, ZA, ex);
          for (int i = 0; i < NFA*ZA; i++) exp_a[i] = ex[i];
        end
        // instance B takes a whole sample per beat
        vb = 1;
        db = '0;
        for (int f = 0; f < NFB; f++) db[f] = lv_b[f][0];
        db[BW-1:NFB] = (BW-NFB)'($urandom);  // padding bits must be ignored
        exp_vb = 1;
        expand(lv_b, ZB, ex);
        for (int i = 0; i < NFB*ZB; i++) exp_b[i] = ex[i];
        step();
      end
    end
    va = 0; vb = 0; exp_va = 0; exp_vb = 0;
    step();
    step();
    checks++;
    if (gaps == 0 || back_to_back == 0) begin
      failures++;
      $display("FAIL gaps=%0d back_to_back=%0d", gaps, back_to_back);
    end
    $display("idle gaps=%0d back-to-back samples=%0d", gaps, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
