// pixel_quantizer: M-bit quantization of a raw pixel intensity.
//
// The encoder stores pixels, like Sobol scalars, as M-bit levels. A raw
// IN_W-bit intensity X is normalised to X / (2^IN_W - 1) and scaled to the
// xi = 2^M levels with the rule the Sobol scalars get, rounding to the
// nearest level: q = round(X / (2^IN_W - 1) * (xi - 1)). For 8-bit pixels and
// M = 4 this is round(X * 15 / 255) = round(X / 17), computed as
// (X * 15 + 127) / 255 (no ties occur). The rounding rule is the published one
// for Sobol scalars (0.859375 -> 13, 0.984375 -> 15); applying it to pixels is
// this design's reading of "both input data and Sobol values are quantized".
//
// Purely combinational: q_o follows pix_i in the same cycle.
module pixel_quantizer #(
  parameter int unsigned IN_W = uhd_pkg::PIX_W,
  parameter int unsigned M    = uhd_pkg::M_DEF
) (
  input  logic [IN_W-1:0] pix_i,
  output logic [M-1:0]    q_o
);
  localparam int unsigned XMAX = (2 ** IN_W) - 1;
  localparam int unsigned LMAX = (2 ** M) - 1;

  logic [IN_W+M-1:0] scaled;

  always_comb begin
    scaled = (IN_W+M)'(pix_i) * (IN_W+M)'(LMAX);
    q_o    = M'((scaled + (IN_W+M)'(XMAX / 2)) / (IN_W+M)'(XMAX));
  end
endmodule
