// tb_tob_mask: the hardwired threshold mask. The default instance (10 bits,
// TOB = 784 / 2 = 392) and the paper's 5-bit example TOB = (00110)_2 are
// swept over every count; the output must be 1 exactly at the threshold.
module tb_tob_mask;
  logic [9:0] c10;
  logic [4:0] c5;
  logic h10, h5;
  int checks = 0, failures = 0;

  tob_mask dut10 (.count_i(c10), .hit_o(h10));
  tob_mask #(.CW(5), .TOB(6)) dut5 (.count_i(c5), .hit_o(h5));

  initial begin
    for (int c = 0; c < 1024; c++) begin
      c10 = 10'(c); #1;
      checks++;
      if (h10 != (c == 392)) begin failures++; $display("FAIL c10=%0d hit=%0d", c, h10); end
    end
    for (int c = 0; c < 32; c++) begin
      c5 = 5'(c); #1;
      checks++;
      if (h5 != (c == 6)) begin failures++; $display("FAIL c5=%0d hit=%0d", c, h5); end
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
