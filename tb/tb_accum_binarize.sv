// tb_accum_binarize: accumulate-and-binarize at the default H = 784.
// Dimensions of 784 bits follow back to back, each with its own density of
// ones (chosen so that counts land below, at and above TOB = 392, including
// exactly 391 and 392), sometimes with idle cycles between bits. After the
// last bit the sign must equal (ones >= 392) and the count the number of ones.
module tb_accum_binarize;
  localparam int H = 784, TOB = H / 2;
  logic clk = 0, rst_n = 0;
  logic valid, first, bitv;
  logic [9:0] count;
  logic sign;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0;

  accum_binarize dut (.clk, .rst_n, .valid_i(valid), .first_i(first), .bit_i(bitv),
                      .count_o(count), .sign_o(sign));

  always #5 clk = ~clk;

  initial begin
    logic bits [H];
    int target, ones;
    valid = 0; first = 0; bitv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int dim = 0; dim < 40; dim++) begin
      // number of ones wanted in this dimension
      case (dim % 8)
        0: target = TOB - 1;
        1: target = TOB;
        2: target = TOB + 1;
        3: target = 0;
        4: target = H;
        default: target = int'($urandom % (H + 1));
      endcase
      for (int i = 0; i < H; i++) bits[i] = (i < target);
      for (int i = H - 1; i > 0; i--) begin   // shuffle
        int j; logic t;
        j = int'($urandom % (i + 1));
        t = bits[i]; bits[i] = bits[j]; bits[j] = t;
      end
      ones = target;
      for (int i = 0; i < H; i++) begin
        @(negedge clk);
        if (dim % 3 == 2 && ($urandom % 5) == 0) begin  // idle cycle
          valid = 0; @(negedge clk);
        end
        valid = 1; first = (i == 0); bitv = bits[i];
      end
      @(negedge clk);
      valid = 0; first = 0;
      checks++;
      if (sign != (ones >= TOB)) begin
        failures++; $display("FAIL dim %0d ones=%0d sign=%0d", dim, ones, sign);
      end
      checks++;
      if (int'(count) != ones) begin
        failures++; $display("FAIL dim %0d count=%0d exp=%0d", dim, count, ones);
      end
      if (ones >= TOB) n_pos++; else n_neg++;
    end
    checks++;
    if (n_pos == 0 || n_neg == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
