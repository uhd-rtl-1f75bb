// tb_uhd_top: end-to-end test of the uHD encoder and classifier at reduced
// size (H = 16 pixels, D = 32 dimensions, Q = 4 classes, M = 4, six images).
// The flow, the reference model and the mechanisms counted are described in
// uhd_e2e.
module tb_uhd_top;
  logic finished;
  int checks, failures;

  uhd_e2e #(.H(16), .D(32), .Q(4), .M(4), .NIMG(6), .NAME("small")) u_run (
    .finished(finished), .checks(checks), .failures(failures));

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
