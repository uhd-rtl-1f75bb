// uhd_top: the uHD hyperdimensional encoder with its classifier.
//
// uHD encodes an image into a hypervector without position hypervectors and
// without binding. Each pixel index i owns a low-discrepancy Sobol sequence
// S_i of D scalars; hypervector bit d of pixel i is +1 when the pixel
// intensity is at least S_i[d], else -1. The per-pixel level bits are summed
// over all H pixels and binarized by sign into the image's D-bit hypervector.
//
// Datapath, per (pixel, dimension) beat, one beat per cycle:
//   pixel_quantizer -> data_regs (REGs)    holds the H M-bit pixel levels
//   sobol_bram (BRAM)                      holds the H x D M-bit Sobol scalars
//   ust                                    turns both scalars into N-bit unary
//                                          streams (table fetch, no counter)
//   unary_comparator                       data >= Sobol -> level bit
//   accum_binarize                         POP++ and TOB masking logic -> sign
//   hv_q                                   D-bit hypervector register
//   hv_classifier                          Hamming search over Q classes
// encoder_ctrl sequences the beats dimension by dimension (H beats per
// dimension, H * D beats per image) and aligns the pipeline.
//
// Use: with busy_o low, write the pixels (pix_we_i, raw 8-bit values), the
// Sobol scalars (sobol_we_i, address i * D + d) and, for inference, the class
// hypervectors (cls_we_i). Writes are ignored while busy_o is high. Pulse
// start_i; the hypervector bits stream out on hv_valid_o / hv_dim_o / hv_bit_o,
// the last with done_o, after which hv_o holds the whole hypervector (bit 1 =
// +1). Two cycles after done_o, pred_valid_o gives the most similar class.
// done_o rises H * D + 1 clock edges after the edge that samples start_i,
// so one image takes H * D + 2 cycles; hv_o is complete one cycle later.
//
// Block functions and the UST, comparator and masking-logic gates follow the
// paper; the traversal order, the one-beat-per-cycle rate, the pipeline
// registers, the host write ports and the classifier's Hamming form are this
// design's choices.
module uhd_top #(
  parameter int unsigned H = uhd_pkg::H_DEF,
  parameter int unsigned D = uhd_pkg::D_DEF,
  parameter int unsigned M = uhd_pkg::M_DEF,
  parameter int unsigned N = 2 ** M,
  parameter int unsigned Q = uhd_pkg::Q_DEF,
  localparam int unsigned PW = uhd_pkg::cw_of(H),
  localparam int unsigned DW = uhd_pkg::cw_of(D),
  localparam int unsigned AW = uhd_pkg::cw_of(H * D),
  localparam int unsigned QW = uhd_pkg::cw_of(Q),
  localparam int unsigned HW = $clog2(D + 1),
  localparam int unsigned XW = uhd_pkg::PIX_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // host loading
  input  logic          pix_we_i,
  input  logic [PW-1:0] pix_addr_i,
  input  logic [XW-1:0] pix_data_i,
  input  logic          sobol_we_i,
  input  logic [AW-1:0] sobol_addr_i,
  input  logic [M-1:0]  sobol_data_i,
  input  logic          cls_we_i,
  input  logic [QW-1:0] cls_idx_i,
  input  logic [D-1:0]  cls_hv_i,
  // control
  input  logic          start_i,
  output logic          busy_o,
  output logic          done_o,
  // hypervector stream and register
  output logic          hv_valid_o,
  output logic [DW-1:0] hv_dim_o,
  output logic          hv_bit_o,
  output logic [D-1:0]  hv_o,
  // classification
  output logic          pred_valid_o,
  output logic [QW-1:0] pred_class_o,
  output logic [HW-1:0] pred_dist_o
);
  logic [M-1:0]  pix_level;
  logic [PW-1:0] rd_pix;
  logic [M-1:0]  rd_level;
  logic [M-1:0]  s1_level_q;
  logic          sobol_re;
  logic [AW-1:0] sobol_raddr;
  logic [M-1:0]  sobol_word;
  logic [N-1:0]  data_stream;
  logic [N-1:0]  sobol_stream;
  logic          level_bit;
  logic          s1_valid, s1_first, s1_last;
  logic          sign;
  logic [PW-1:0] pop_count;
  logic [D-1:0]  hv_q;

  pixel_quantizer #(.IN_W(XW), .M(M)) u_quant (
    .pix_i(pix_data_i),
    .q_o  (pix_level)
  );

  data_regs #(.H(H), .M(M)) u_regs (
    .clk    (clk),
    .rst_n  (rst_n),
    .we_i   (pix_we_i && !busy_o),
    .waddr_i(pix_addr_i),
    .wdata_i(pix_level),
    .raddr_i(rd_pix),
    .rdata_o(rd_level)
  );

  sobol_bram #(.H(H), .D(D), .M(M)) u_bram (
    .clk    (clk),
    .we_i   (sobol_we_i && !busy_o),
    .waddr_i(sobol_addr_i),
    .wdata_i(sobol_data_i),
    .re_i   (sobol_re),
    .raddr_i(sobol_raddr),
    .rdata_o(sobol_word)
  );

  encoder_ctrl #(.H(H), .D(D)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start_i     (start_i),
    .busy_o      (busy_o),
    .done_o      (done_o),
    .pix_o       (rd_pix),
    .sobol_re_o  (sobol_re),
    .sobol_addr_o(sobol_raddr),
    .s1_valid_o  (s1_valid),
    .s1_first_o  (s1_first),
    .s1_last_o   (s1_last),
    .out_valid_o (hv_valid_o),
    .out_dim_o   (hv_dim_o)
  );

  // the pixel level waits one cycle for the BRAM word of the same beat
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        s1_level_q <= '0;
    else if (sobol_re) s1_level_q <= rd_level;
  end

  ust #(.M(M), .N(N)) u_ust (
    .idx_a_i   (s1_level_q),
    .idx_b_i   (sobol_word),
    .stream_a_o(data_stream),
    .stream_b_o(sobol_stream)
  );

  unary_comparator #(.N(N)) u_cmp (
    .data_i (data_stream),
    .sobol_i(sobol_stream),
    .ge_o   (level_bit)
  );

  accum_binarize #(.H(H)) u_acc (
    .clk    (clk),
    .rst_n  (rst_n),
    .valid_i(s1_valid),
    .first_i(s1_first),
    .bit_i  (level_bit),
    .count_o(pop_count),
    .sign_o (sign)
  );

  assign hv_bit_o = sign;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          hv_q <= '0;
    else if (hv_valid_o) hv_q[hv_dim_o] <= sign;
  end
  assign hv_o = hv_q;

  hv_classifier #(.D(D), .Q(Q)) u_cls (
    .clk         (clk),
    .rst_n       (rst_n),
    .cls_we_i    (cls_we_i && !busy_o),
    .cls_idx_i   (cls_idx_i),
    .cls_hv_i    (cls_hv_i),
    .q_valid_i   (hv_valid_o),
    .q_first_i   (hv_dim_o == '0),
    .q_last_i    (done_o),
    .q_dim_i     (hv_dim_o),
    .q_bit_i     (sign),
    .pred_valid_o(pred_valid_o),
    .pred_class_o(pred_class_o),
    .pred_dist_o (pred_dist_o)
  );

  // a dimension's last beat is always a valid beat
  a_last_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                 s1_last |-> s1_valid);

  // the popcount never passes H within one dimension
  a_count_le_h: assert property (@(posedge clk) disable iff (!rst_n)
                                 s1_valid |-> int'(pop_count) <= int'(H));
endmodule
