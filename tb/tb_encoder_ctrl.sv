// tb_encoder_ctrl: traversal order and timing of the sequencer at H = 5,
// D = 3. Every stage-0 beat must address (pixel, dimension) in
// dimension-major order with Sobol address i * D + d; stage-1 flags must be
// the stage-0 beat delayed by one cycle; out_valid_o must fire once per
// dimension, in order; done_o must rise H * D + 1 clock edges after the edge that samples start_i and
// start_i must be ignored while busy. Two runs back to back.
module tb_encoder_ctrl;
  localparam int H = 5, D = 3;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [2:0] pix;
  logic sre;
  logic [3:0] saddr;
  logic s1v, s1f, s1l, ov;
  logic [1:0] od;
  int checks = 0, failures = 0;

  encoder_ctrl #(.H(H), .D(D)) dut (
    .clk, .rst_n, .start_i(start), .busy_o(busy), .done_o(done),
    .pix_o(pix), .sobol_re_o(sre), .sobol_addr_o(saddr),
    .s1_valid_o(s1v), .s1_first_o(s1f), .s1_last_o(s1l),
    .out_valid_o(ov), .out_dim_o(od));

  always #5 clk = ~clk;

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got=%0d exp=%0d", what, got, exp); end
  endtask

  initial begin
    int beat, outs, cyc;
    logic prev_v, prev_f, prev_l;
    start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      expect_eq(int'(busy), 0, "idle before start");
      start = 1;
      @(negedge clk);
      start = 0;
      beat = 0; outs = 0; cyc = 0;
      prev_v = 0; prev_f = 0; prev_l = 0;
      while (!done) begin
        cyc++;
        if (cyc == 3) start = 1;      // must be ignored while busy
        if (cyc == 4) start = 0;
        // stage-1 flags are last cycle's stage-0 beat
        expect_eq(int'(s1v), int'(prev_v), "s1_valid");
        expect_eq(int'(s1f), int'(prev_f), "s1_first");
        expect_eq(int'(s1l), int'(prev_l), "s1_last");
        prev_v = sre; prev_f = 0; prev_l = 0;
        if (sre) begin
          expect_eq(int'(pix), beat % H, "pixel index");
          expect_eq(int'(saddr), (beat % H) * D + beat / H, "sobol address");
          prev_f = (beat % H == 0);
          prev_l = (beat % H == H - 1);
          beat++;
        end
        if (ov) begin
          expect_eq(int'(od), outs, "out dimension");
          outs++;
        end
        @(negedge clk);
        if (cyc > 1000) break;
      end
      expect_eq(int'(od), D - 1, "last dimension with done");
      expect_eq(outs + 1, D, "outputs per run");
      expect_eq(beat, H * D, "beats per run");
      expect_eq(cyc, H * D + 1, "cycles start to done");
      @(negedge clk);
      expect_eq(int'(busy), 0, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
