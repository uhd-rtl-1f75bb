// tb_pop_counter: the POP++ counter against a software count. Random bits,
// random valid gaps and a restart (first_i) every 40 to 200 beats; the
// count is compared after every clock edge.
module tb_pop_counter;
  logic clk = 0, rst_n = 0;
  logic valid, first, bitv;
  logic [9:0] count;
  int model = 0;
  int checks = 0, failures = 0;

  pop_counter dut (.clk, .rst_n, .valid_i(valid), .first_i(first), .bit_i(bitv), .count_o(count));

  always #5 clk = ~clk;

  initial begin
    int left;
    valid = 0; first = 0; bitv = 0;
    repeat (2) @(posedge clk);
    #1; checks++; if (count != 0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    left = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      valid = ($urandom % 4) != 0;
      bitv  = 1'($urandom);
      first = valid && (left == 0);
      if (valid) begin
        if (first) begin model = int'(bitv); left = 40 + int'($urandom % 160); end
        else model = model + int'(bitv);
        left--;
      end
      @(posedge clk); #1;
      checks++;
      if (int'(count) != model) begin
        failures++; $display("FAIL n=%0d count=%0d exp=%0d", n, count, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
