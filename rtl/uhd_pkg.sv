// uhd_pkg: sizes shared by the uHD encoder.
//
// The defaults describe the main configuration: MNIST images of 28 x 28 = 784
// pixels (H), hypervectors of D = 1024 dimensions, M = 4-bit quantization of
// both pixels and Sobol scalars (xi = 16 levels), unary bit-streams of
// N = 16 bits, and the ten MNIST classes. CW is the popcount width
// ceil(log2 H) and TOB = H/2 the threshold of binarization. H, D, M, N, CW
// and TOB follow the paper; the number of classes is the dataset's.
package uhd_pkg;
  localparam int unsigned D_DEF   = 1024;           // hypervector dimensions
  localparam int unsigned H_DEF   = 784;            // pixels (features) per image
  localparam int unsigned M_DEF   = 4;              // bits per quantized scalar
  localparam int unsigned N_DEF   = 2 ** M_DEF;     // unary stream length (16)
  localparam int unsigned Q_DEF   = 10;             // number of classes
  localparam int unsigned PIX_W   = 8;              // raw pixel width

  // counter width: ceil(log2 h), at least 1
  function automatic int unsigned cw_of(input int unsigned h);
    return (h < 2) ? 1 : $clog2(h);
  endfunction
endpackage
