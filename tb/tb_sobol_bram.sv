// tb_sobol_bram: fills a small Sobol BRAM (H = 6 sequences, D = 16 scalars),
// then reads every word in random order and checks the one-cycle read latency,
// that the output holds while re_i is low, and read-before-write on a
// same-address collision.
module tb_sobol_bram;
  localparam int H = 6, D = 16, DEPTH = H * D;
  logic clk = 0;
  logic we, re;
  logic [6:0] waddr, raddr;
  logic [3:0] wdata, rdata;
  logic [3:0] model [DEPTH];
  int checks = 0, failures = 0;

  sobol_bram #(.H(H), .D(D), .M(4)) dut (.clk, .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
                                         .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  always #5 clk = ~clk;

  task automatic check(input logic [3:0] got, input logic [3:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 7'(a); wdata = 4'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 3 * DEPTH; n++) begin
      int a;
      a = int'($urandom % DEPTH);
      re = 1; raddr = 7'(a);
      @(negedge clk);
      check(rdata, model[a], $sformatf("read %0d", a));
      re = 0; raddr = 7'((a + 1) % DEPTH);
      @(negedge clk);
      check(rdata, model[a], "hold while re low");
    end
    // collision: the read returns the old word, the new one is stored
    re = 1; we = 1; raddr = 7'd5; waddr = 7'd5; wdata = ~model[5];
    @(negedge clk);
    check(rdata, model[5], "read before write");
    model[5] = wdata; we = 0;
    @(negedge clk);
    check(rdata, model[5], "written word");
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
