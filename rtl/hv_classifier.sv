// hv_classifier: similarity search against the stored class hypervectors.
//
// Inference compares the binarized hypervector of a test image with the Q
// binarized class hypervectors and picks the most similar class; the paper
// uses cosine similarity. For bipolar vectors of length D, cosine similarity
// is 1 - 2 * hamming / D, so the class with the smallest Hamming distance has
// the highest cosine similarity. This unit therefore keeps one Hamming
// distance counter per class and needs no multiplier; that equivalence and
// the streaming form are this design's choices.
//
// Class hypervectors (bit = 1 for +1) are written whole through cls_we_i.
// The query arrives as the encoder emits it, one bit per q_valid_i with its
// dimension q_dim_i; q_first_i clears the counters, q_last_i ends the query.
// Two cycles after the q_last_i beat, pred_valid_o pulses with pred_class_o (lowest
// index wins a tie) and its distance pred_dist_o.
module hv_classifier #(
  parameter int unsigned D = uhd_pkg::D_DEF,
  parameter int unsigned Q = uhd_pkg::Q_DEF,
  localparam int unsigned DW = uhd_pkg::cw_of(D),
  localparam int unsigned CW = $clog2(D + 1),
  localparam int unsigned QW = uhd_pkg::cw_of(Q)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cls_we_i,
  input  logic [QW-1:0] cls_idx_i,
  input  logic [D-1:0]  cls_hv_i,
  input  logic          q_valid_i,
  input  logic          q_first_i,
  input  logic          q_last_i,
  input  logic [DW-1:0] q_dim_i,
  input  logic          q_bit_i,
  output logic          pred_valid_o,
  output logic [QW-1:0] pred_class_o,
  output logic [CW-1:0] pred_dist_o
);
  logic [D-1:0]  cls_q  [Q];
  logic [CW-1:0] dist_q [Q];
  logic [CW-1:0] dist_d [Q];
  logic          fin_q;
  logic [QW-1:0] best_idx;
  logic [CW-1:0] best_dist;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(Q); c++) cls_q[c] <= '0;
    end else if (cls_we_i && (int'(cls_idx_i) < int'(Q))) begin
      cls_q[cls_idx_i] <= cls_hv_i;
    end
  end

  always_comb begin
    for (int c = 0; c < int'(Q); c++) begin
      dist_d[c] = dist_q[c];
      if (q_valid_i) begin
        dist_d[c] = (q_first_i ? '0 : dist_q[c]) +
                    CW'(cls_q[c][q_dim_i] ^ q_bit_i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(Q); c++) dist_q[c] <= '0;
      fin_q <= 1'b0;
    end else begin
      for (int c = 0; c < int'(Q); c++) dist_q[c] <= dist_d[c];
      fin_q <= q_valid_i && q_last_i;
    end
  end

  // minimum search over the final distances
  always_comb begin
    best_idx  = '0;
    best_dist = dist_q[0];
    for (int c = 1; c < int'(Q); c++) begin
      if (dist_q[c] < best_dist) begin
        best_dist = dist_q[c];
        best_idx  = QW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred_valid_o <= 1'b0;
      pred_class_o <= '0;
      pred_dist_o  <= '0;
    end else begin
      pred_valid_o <= fin_q;
      if (fin_q) begin
        pred_class_o <= best_idx;
        pred_dist_o  <= best_dist;
      end
    end
  end
endmodule
