// tb_dwn_workloads: runs the accelerator at the sizes of the evaluated DWN
// models, each with the stand-in model contents (trained contents are not
// available), and checks every classification against the reference model.
//
// Sizes per model: z, layer widths and LUT fan-in n from the published model
// configurations; feature and class counts are those of the public datasets
// (MNIST/Fashion-MNIST 784 features and 10 classes, CIFAR-10 3072 features
// and 10 classes, JSC 16 features and 5 classes, phoneme 5 features and 2
// classes). The larger evaluated models (MNIST n=2 2 x 6000, CIFAR-10 8000
// nodes) run the same way by adding a runner instance; verilator then needs
// about ten minutes to build the simulation.
//   mnist_n6_lg     z=3,   LUT-6, 2000, 1000
//   fmnist_n6       z=7,   LUT-6, 2000, 2000
//   jsc_n6_sm       z=200, LUT-6, 10
//   jsc_n6_lg       z=200, LUT-6, 2400
//   phoneme_tiny    z=200, LUT-2, 64 then reduction 32, 16, 8, 4, 2, 1
module tb_dwn_workloads;
  import dwn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 5;
  logic done [N];
  int   chk  [N];
  int   fl   [N];

  dwn_workload_runner #(.NAME("mnist_n6_lg"), .NUM_FEATURES(784), .Z(3), .LUT_K(6), .NUM_LAYERS(2),
    .LAYER_LUTS('{2000, 1000, 0, 0, 0, 0, 0, 0}), .NUM_CLASSES(10), .NSAMPLES(6))
    w0 (.clk(clk), .rst_n(rst_n), .done(done[0]), .checks(chk[0]), .failures(fl[0]));
  dwn_workload_runner #(.NAME("jsc_n6_sm"), .NUM_FEATURES(16), .Z(200), .LUT_K(6), .NUM_LAYERS(1),
    .LAYER_LUTS('{10, 0, 0, 0, 0, 0, 0, 0}), .NUM_CLASSES(5), .NSAMPLES(20))
    w1 (.clk(clk), .rst_n(rst_n), .done(done[1]), .checks(chk[1]), .failures(fl[1]));
  dwn_workload_runner #(.NAME("jsc_n6_lg"), .NUM_FEATURES(16), .Z(200), .LUT_K(6), .NUM_LAYERS(1),
    .LAYER_LUTS('{2400, 0, 0, 0, 0, 0, 0, 0}), .NUM_CLASSES(5), .NSAMPLES(20))
    w2 (.clk(clk), .rst_n(rst_n), .done(done[2]), .checks(chk[2]), .failures(fl[2]));
  dwn_workload_runner #(.NAME("phoneme_tiny"), .NUM_FEATURES(5), .Z(200), .LUT_K(2), .NUM_LAYERS(1),
    .LAYER_LUTS('{64, 0, 0, 0, 0, 0, 0, 0}), .NUM_CLASSES(2), .HEAD(HEAD_REDUCTION), .NSAMPLES(20))
    w3 (.clk(clk), .rst_n(rst_n), .done(done[3]), .checks(chk[3]), .failures(fl[3]));
  dwn_workload_runner #(.NAME("fmnist_n6"), .NUM_FEATURES(784), .Z(7), .LUT_K(6), .NUM_LAYERS(2),
    .LAYER_LUTS('{2000, 2000, 0, 0, 0, 0, 0, 0}), .NUM_CLASSES(10), .NSAMPLES(4))
    w4 (.clk(clk), .rst_n(rst_n), .done(done[4]), .checks(chk[4]), .failures(fl[4]));

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.sum(), fl.sum() + 1);
    $finish;
  end

  initial begin
    int all_done;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < N; i++) if (!done[i]) all_done = 0;
    end while (!all_done);
    $display("TB_RESULT checks=%0d failures=%0d", chk.sum(), fl.sum());
    $finish;
  end
endmodule
