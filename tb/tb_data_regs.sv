// tb_data_regs: loads all 784 pixel registers with random levels, then reads
// every one back and compares with a copy kept by the testbench. Also checks
// that reset clears the registers and that out-of-range writes are dropped.
module tb_data_regs;
  localparam int H = 784;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [9:0] waddr, raddr;
  logic [3:0] wdata, rdata;
  logic [3:0] model [H];
  int checks = 0, failures = 0;

  data_regs dut (.clk, .rst_n, .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
                 .raddr_i(raddr), .rdata_o(rdata));

  always #5 clk = ~clk;

  task automatic check(input logic [3:0] got, input logic [3:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < H; i += 97) begin
      raddr = 10'(i); #1; check(rdata, 4'd0, "after reset");
    end
    for (int i = 0; i < H; i++) begin
      @(negedge clk);
      we = 1; waddr = 10'(i); wdata = 4'($urandom); model[i] = wdata;
    end
    @(negedge clk);
    // write beyond H is ignored and leaves entry 0 unchanged
    waddr = 10'(1000); wdata = ~model[0];
    @(negedge clk);
    we = 0;
    for (int i = 0; i < H; i++) begin
      raddr = 10'(i); #1; check(rdata, model[i], $sformatf("entry %0d", i));
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
