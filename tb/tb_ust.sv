// tb_ust: checks every entry of the 16-level Unary Stream Table on both read
// ports: stream k must hold exactly k ones, all in the low positions
// (right-aligned, so stream & (stream + 1) == 0), and the two ports must be
// independent.
module tb_ust;
  logic [3:0]  ia, ib;
  logic [15:0] sa, sb;
  int checks = 0, failures = 0;

  ust dut (.idx_a_i(ia), .idx_b_i(ib), .stream_a_o(sa), .stream_b_o(sb));

  task automatic check_stream(input logic [15:0] s, input int k, input string port);
    checks++;
    if ($countones(s) != k || ((s & (s + 16'd1)) != 16'd0)) begin
      failures++;
      $display("FAIL port %s index %0d stream %b", port, k, s);
    end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        ia = 4'(a); ib = 4'(b);
        #1;
        check_stream(sa, a, "a");
        check_stream(sb, b, "b");
      end
    end
    // values printed in the paper's table: U0, U1, U2, U5
    ia = 4'd2; ib = 4'd5; #1;
    checks++;
    if (sa[7:0] != 8'b0000_0011 || sb[7:0] != 8'b0001_1111) begin
      failures++; $display("FAIL U2/U5 %b %b", sa, sb);
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
