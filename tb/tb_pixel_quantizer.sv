// tb_pixel_quantizer: exhaustive check of the 8-bit to 4-bit pixel quantizer.
// Every intensity 0..255 is applied; the expected level round(X / 17) is
// worked out in floating point (255 / 15 = 17).
module tb_pixel_quantizer;
  logic [7:0] pix;
  logic [3:0] q;
  int checks = 0, failures = 0;
  int exp_q;

  pixel_quantizer dut (.pix_i(pix), .q_o(q));

  initial begin
    for (int x = 0; x < 256; x++) begin
      pix = 8'(x);
      #1;
      exp_q = int'($floor(real'(x) / 17.0 + 0.5));
      checks++;
      if (int'(q) != exp_q) begin
        failures++;
        $display("FAIL pix=%0d q=%0d exp=%0d", x, q, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
