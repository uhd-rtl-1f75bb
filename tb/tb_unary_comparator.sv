// tb_unary_comparator: the unary comparator against integer comparison.
// All 16 x 16 pairs of right-aligned 16-bit unary streams are applied to the
// default instance (expected: a >= b). A 7-bit instance reproduces the
// paper's example, data 2 (0000011) against Sobol 5 (0011111) giving 0, and
// all 8 x 8 pairs at that size.
module tb_unary_comparator;
  logic [15:0] a16, b16;
  logic [6:0]  a7, b7;
  logic        ge16, ge7;
  int checks = 0, failures = 0;

  unary_comparator dut16 (.data_i(a16), .sobol_i(b16), .ge_o(ge16));
  unary_comparator #(.N(7)) dut7 (.data_i(a7), .sobol_i(b7), .ge_o(ge7));

  function automatic logic [15:0] unary16(input int k);
    logic [15:0] s = '0;
    for (int j = 0; j < k; j++) s[j] = 1'b1;
    return s;
  endfunction

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        a16 = unary16(a); b16 = unary16(b); #1;
        checks++;
        if (ge16 != (a >= b)) begin
          failures++; $display("FAIL N=16 a=%0d b=%0d ge=%0d", a, b, ge16);
        end
      end
    end
    for (int a = 0; a < 8; a++) begin
      for (int b = 0; b < 8; b++) begin
        a16 = unary16(a); b16 = unary16(b); a7 = a16[6:0]; b7 = b16[6:0]; #1;
        checks++;
        if (ge7 != (a >= b)) begin
          failures++; $display("FAIL N=7 a=%0d b=%0d ge=%0d", a, b, ge7);
        end
      end
    end
    a7 = 7'b0000011; b7 = 7'b0011111; #1;
    checks++;
    if (ge7 !== 1'b0) begin failures++; $display("FAIL paper example"); end
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
