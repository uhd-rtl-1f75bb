// tb_uhd_workloads: the end-to-end flow of uhd_e2e at the sizes of the
// evaluated image datasets, all four running side by side:
//   28 x 28 grayscale images (MNIST, Fashion-MNIST) at D = 2048 and 8192,
//   28 x 28 x 3 = 2352 features (BloodMNIST, 8 classes) at D = 1024,
//   32 x 32 x 3 = 3072 features (CIFAR-10, SVHN, 10 classes) at D = 1024.
// MNIST-sized images at D = 1024 are the default size, run by tb_uhd_full.
// Pixel contents are synthetic; the sizes are what is exercised.
module tb_uhd_workloads;
  logic fin [4];
  int   chk [4];
  int   fal [4];

  uhd_e2e #(.H(784),  .D(2048), .Q(10), .NIMG(2), .NAME("mnist_d2k")) u_d2k (
    .finished(fin[0]), .checks(chk[0]), .failures(fal[0]));
  uhd_e2e #(.H(784),  .D(8192), .Q(10), .NIMG(2), .NAME("mnist_d8k")) u_d8k (
    .finished(fin[1]), .checks(chk[1]), .failures(fal[1]));
  uhd_e2e #(.H(2352), .D(1024), .Q(8),  .NIMG(2), .NAME("blood_d1k")) u_rgb28 (
    .finished(fin[2]), .checks(chk[2]), .failures(fal[2]));
  uhd_e2e #(.H(3072), .D(1024), .Q(10), .NIMG(2), .NAME("cifar_d1k")) u_rgb32 (
    .finished(fin[3]), .checks(chk[3]), .failures(fal[3]));

  initial begin
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    $display("TB_RESULT checks=%0d failures=%0d",
             chk[0] + chk[1] + chk[2] + chk[3], fal[0] + fal[1] + fal[2] + fal[3]);
    $finish;
  end

  initial begin
    #2s;
    $display("TB_RESULT checks=%0d failures=%0d",
             chk[0] + chk[1] + chk[2] + chk[3], fal[0] + fal[1] + fal[2] + fal[3] + 1);
    $finish;
  end
endmodule
