// tb_hv_classifier: similarity search at D = 64, Q = 5. Random class
// hypervectors are stored; queries are noisy copies of a chosen class (and a
// few pure random ones), streamed one bit per cycle with occasional gaps.
// The prediction must be the class with the largest dot product of the +-1
// vectors (cosine similarity, computed here directly), ties to the lowest
// index, with its Hamming distance.
module tb_hv_classifier;
  localparam int D = 64, Q = 5;
  logic clk = 0, rst_n = 0;
  logic cwe;
  logic [2:0] cidx;
  logic [D-1:0] chv;
  logic qv, qf, ql, qb;
  logic [5:0] qd;
  logic pv;
  logic [2:0] pc;
  logic [6:0] pdist;
  logic [D-1:0] cls [Q];
  int checks = 0, failures = 0;

  hv_classifier #(.D(D), .Q(Q)) dut (
    .clk, .rst_n, .cls_we_i(cwe), .cls_idx_i(cidx), .cls_hv_i(chv),
    .q_valid_i(qv), .q_first_i(qf), .q_last_i(ql), .q_dim_i(qd), .q_bit_i(qb),
    .pred_valid_o(pv), .pred_class_o(pc), .pred_dist_o(pdist));

  always #5 clk = ~clk;

  initial begin
    logic [D-1:0] query;
    int best, best_dot, dot, exp_dist, waitc;
    cwe = 0; cidx = 0; chv = 0; qv = 0; qf = 0; ql = 0; qd = 0; qb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < Q; c++) begin
      @(negedge clk);
      cwe = 1; cidx = 3'(c); chv = {$urandom, $urandom}; cls[c] = chv;
    end
    @(negedge clk); cwe = 0;
    for (int t = 0; t < 60; t++) begin
      query = cls[t % Q];
      for (int k = 0; k < 12 + t % 10; k++) query[$urandom % D] ^= 1'b1;
      if (t % 7 == 6) query = {$urandom, $urandom};
      if (t % 11 == 10) query = cls[1];     // exact match, distance 0
      // reference: largest cosine similarity = largest dot product
      best = 0; best_dot = -D - 1;
      for (int c = 0; c < Q; c++) begin
        dot = 0;
        for (int d = 0; d < D; d++) dot += (query[d] == cls[c][d]) ? 1 : -1;
        if (dot > best_dot) begin best_dot = dot; best = c; end
      end
      exp_dist = (D - best_dot) / 2;
      for (int d = 0; d < D; d++) begin
        @(negedge clk);
        if (($urandom % 6) == 0) begin qv = 0; @(negedge clk); end
        qv = 1; qf = (d == 0); ql = (d == D - 1); qd = 6'(d); qb = query[d];
      end
      @(negedge clk); qv = 0; ql = 0;
      waitc = 0;
      while (!pv && waitc < 5) begin @(negedge clk); waitc++; end
      checks++;
      if (waitc != 1) begin failures++; $display("FAIL t=%0d latency %0d", t, waitc); end
      checks++;
      if (!pv || int'(pc) != best || int'(pdist) != exp_dist) begin
        failures++; $display("FAIL t=%0d class=%0d exp=%0d dist=%0d exp=%0d", t, pc, best, pdist, exp_dist);
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
