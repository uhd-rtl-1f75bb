// uhd_e2e: reusable end-to-end check of uhd_top at a given size.
//
// Instantiates uhd_top with the parameters H, D, Q, M on its own clock and
// runs the whole flow. It loads Sobol scalars (a bit-reversed counter, the
// van der Corput sequence, with a different digital shift per sequence,
// rounded to M-bit levels), builds Q class templates of pixels at levels 6 and
// 7, encodes them with its own reference model to get the class
// hypervectors and stores those. Then it encodes NIMG noisy copies of the
// templates through the design (the second one twice: once with writes
// attempted while busy, once back to back) and compares every streamed
// hypervector bit, the final hypervector, the start-to-done latency of
// H * D + 2 cycles and the predicted class with the reference model. The
// model follows the algorithm (quantize by rounding, compare data level with Sobol
// level, count ones, sign by ones >= H/2, nearest class by Hamming distance),
// not the RTL.
//
// It counts each mechanism and fails if one never happened: sign bits set
// (threshold reached) and not set, comparator beats with data >= Sobol and
// with data < Sobol, writes dropped while busy, back-to-back images, correct
// predictions. finished rises when all is done; checks and failures count.
module uhd_e2e #(
  parameter int H = 16,
  parameter int D = 32,
  parameter int Q = 4,
  parameter int M = 4,
  parameter int NIMG = 6,
  parameter string NAME = "e2e"
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int PW = (H < 2) ? 1 : $clog2(H);
  localparam int DW = (D < 2) ? 1 : $clog2(D);
  localparam int AW = $clog2(H * D);
  localparam int QW = (Q < 2) ? 1 : $clog2(Q);
  localparam int HW = $clog2(D + 1);

  logic clk = 0, rst_n = 0;
  initial begin finished = 1'b0; checks = 0; failures = 0; end
  logic pix_we, sobol_we, cls_we, start;
  logic [PW-1:0] pix_addr;
  logic [7:0] pix_data;
  logic [AW-1:0] sobol_addr;
  logic [M-1:0] sobol_data;
  logic [QW-1:0] cls_idx;
  logic [D-1:0] cls_hv;
  logic busy, done, hv_valid, hv_bit, pred_valid;
  logic [DW-1:0] hv_dim;
  logic [D-1:0] hv;
  logic [QW-1:0] pred_class;
  logic [HW-1:0] pred_dist;

  int n_sign1 = 0, n_sign0 = 0, n_ge = 0, n_lt = 0, n_blocked = 0, n_b2b = 0, n_pred = 0;

  // DUT_INSTANCE
  uhd_top #(.H(H), .D(D), .M(M), .Q(Q)) dut (
    .clk, .rst_n,
    .pix_we_i(pix_we), .pix_addr_i(pix_addr), .pix_data_i(pix_data),
    .sobol_we_i(sobol_we), .sobol_addr_i(sobol_addr), .sobol_data_i(sobol_data),
    .cls_we_i(cls_we), .cls_idx_i(cls_idx), .cls_hv_i(cls_hv),
    .start_i(start), .busy_o(busy), .done_o(done),
    .hv_valid_o(hv_valid), .hv_dim_o(hv_dim), .hv_bit_o(hv_bit), .hv_o(hv),
    .pred_valid_o(pred_valid), .pred_class_o(pred_class), .pred_dist_o(pred_dist));

  always #5 clk = ~clk;

  logic [M-1:0] sobol_model [H * D];
  logic [7:0]   templ [Q][H];
  logic [7:0]   img [H];
  logic [D-1:0] cls_model [Q];

  // quantized Sobol-like scalar of sequence i, point d
  function automatic logic [M-1:0] sobol_level(input int i, input int d);
    logic [15:0] r, shift;
    for (int b = 0; b < 16; b++) r[b] = 16'(d) >> (15 - b) & 16'd1;
    shift = 16'((i * 40503 + 12345) & 16'hffff);
    return M'((32'(r ^ shift) * 32'((1 << M) - 1) + 32'h8000) >> 16);   // round(S * 15)
  endfunction

  // reference encoder: returns the hypervector and the comparison statistics
  function automatic logic [D-1:0] encode(input logic [7:0] p [H], output int ge, output int lt);
    logic [D-1:0] v;
    int ones, lvl;
    ge = 0; lt = 0;
    for (int d = 0; d < D; d++) begin
      ones = 0;
      for (int i = 0; i < H; i++) begin
        lvl = (int'(p[i]) * ((1 << M) - 1) + 127) / 255;   // round to nearest
        if (lvl >= int'(sobol_model[i * D + d])) begin ones++; ge++; end
        else lt++;
      end
      v[d] = (ones >= H / 2);
    end
    return v;
  endfunction

  task automatic expect_eq(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %s got=%0d exp=%0d", NAME, what, got, exp); end
  endtask

  task automatic load_image(input logic [7:0] p [H]);
    for (int i = 0; i < H; i++) begin
      @(negedge clk);
      pix_we = 1; pix_addr = PW'(i); pix_data = p[i];
    end
    @(negedge clk); pix_we = 0;
  endtask

  // start one encoding, check the stream, hypervector, latency, prediction
  task automatic run_image(input logic [D-1:0] exp_hv, input bit try_write, input bit b2b);
    int cyc, outs, best, bestd, hd;
    if (!b2b) @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; outs = 0;
    while (!done && cyc < H * D + 100) begin
      if (try_write && cyc == 5) begin
        // writes while busy must be dropped
        sobol_we = 1; sobol_addr = '0; sobol_data = ~sobol_model[0];
        pix_we = 1; pix_addr = '0; pix_data = ~img[0];
      end else begin
        sobol_we = 0; pix_we = 0;
      end
      if (hv_valid) begin
        expect_eq(hv_dim, outs, "stream dimension");
        expect_eq(hv_bit, exp_hv[outs], $sformatf("stream bit %0d", outs));
        outs++;
      end
      @(negedge clk);
      cyc++;
    end
    sobol_we = 0; pix_we = 0;
    expect_eq(hv_bit, exp_hv[D - 1], "last stream bit");
    expect_eq(outs + 1, D, "bits streamed");
    expect_eq(cyc, H * D + 2, "cycles from start to done");
    for (int d = 0; d < D; d++) if (exp_hv[d]) n_sign1++; else n_sign0++;
    // reference similarity search
    best = 0; bestd = D + 1;
    for (int c = 0; c < Q; c++) begin
      hd = $countones(exp_hv ^ cls_model[c]);
      if (hd < bestd) begin bestd = hd; best = c; end
    end
    @(negedge clk);
    expect_eq(hv, exp_hv, "hypervector register");
    expect_eq(pred_valid, 0, "prediction not yet valid");
    @(negedge clk);
    expect_eq(pred_valid, 1, "prediction valid");
    expect_eq(pred_class, best, "predicted class");
    expect_eq(pred_dist, bestd, "prediction distance");
    if (pred_valid && int'(pred_class) == best) n_pred++;
  endtask

  initial begin
    int ge, lt;
    logic [D-1:0] exp_hv;
    pix_we = 0; sobol_we = 0; cls_we = 0; start = 0;
    pix_addr = '0; pix_data = '0; sobol_addr = '0; sobol_data = '0; cls_idx = '0; cls_hv = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < H; i++)
      for (int d = 0; d < D; d++) sobol_model[i * D + d] = sobol_level(i, d);
    for (int a = 0; a < H * D; a++) begin
      @(negedge clk);
      sobol_we = 1; sobol_addr = AW'(a); sobol_data = sobol_model[a];
    end
    @(negedge clk); sobol_we = 0;

    // class hypervectors from the templates, by the reference model
    for (int c = 0; c < Q; c++) begin
      // templates of levels 6 and 7 (pixel 17 * level + 0..16): a pixel
      // at level 6 or 7 gives a +1 bit for roughly half the Sobol scalars,
      // so per-dimension counts fall on both sides of H/2
      for (int i = 0; i < H; i++)
        templ[c][i] = 8'(17 * (6 + $urandom % 2) + $urandom % 17);
      cls_model[c] = encode(templ[c], ge, lt);
      @(negedge clk);
      cls_we = 1; cls_idx = QW'(c); cls_hv = cls_model[c];
    end
    @(negedge clk); cls_we = 0;

    for (int n = 0; n < NIMG; n++) begin
      for (int i = 0; i < H; i++) begin
        img[i] = templ[(n * (Q - 1)) % Q][i];
        if (($urandom % 8) == 0) img[i] = 8'(17 * (6 + $urandom % 2) + $urandom % 17);
      end
      load_image(img);
      exp_hv = encode(img, ge, lt);
      n_ge += ge; n_lt += lt;
      run_image(exp_hv, n == 1, 1'b0);
      if (n == 1) begin
        // the dropped writes must have left data and Sobol words unchanged:
        // run again without reloading, back to back with the check
        run_image(exp_hv, 1'b0, 1'b1);
        n_blocked++;
        n_b2b++;
      end
    end

    expect_eq(n_sign1 > 0, 1, "coverage: threshold reached");
    expect_eq(n_sign0 > 0, 1, "coverage: threshold not reached");
    expect_eq(n_ge > 0, 1, "coverage: comparator data >= sobol");
    expect_eq(n_lt > 0, 1, "coverage: comparator data < sobol");
    expect_eq(n_blocked > 0, 1, "coverage: writes dropped while busy");
    expect_eq(n_b2b > 0, 1, "coverage: back-to-back images");
    expect_eq(n_pred > 0, 1, "coverage: predictions");
    $display("%s mechanisms: sign1=%0d sign0=%0d ge=%0d lt=%0d blocked=%0d b2b=%0d pred=%0d",
             NAME, n_sign1, n_sign0, n_ge, n_lt, n_blocked, n_b2b, n_pred);
    finished = 1'b1;
  end
endmodule
