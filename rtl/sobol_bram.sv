// sobol_bram: block RAM of quantized Sobol sequences.
//
// Holds H Sobol sequences S_1 .. S_H (one per pixel position: the pixel's
// index selects its sequence, which replaces a position hypervector), each of
// D quantized M-bit scalars. Word (i, d) sits at address i * D + d. A scalar
// is round(S * (xi - 1)) of a Sobol point S in [0, 1), e.g. 0.671875 -> 10,
// 0.859375 -> 13.
// The sequences are generated offline and written through the write port.
//
// Simple dual-port, one write and one read port, no reset (a BRAM's content
// is not reset). Read latency is one cycle: rdata_o holds the word addressed
// by raddr_i in the cycle after re_i. Writing and reading the same address in
// one cycle returns the old word.
module sobol_bram #(
  parameter int unsigned H = uhd_pkg::H_DEF,
  parameter int unsigned D = uhd_pkg::D_DEF,
  parameter int unsigned M = uhd_pkg::M_DEF,
  localparam int unsigned DEPTH = H * D,
  localparam int unsigned AW = uhd_pkg::cw_of(DEPTH)
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [M-1:0]  wdata_i,
  input  logic          re_i,
  input  logic [AW-1:0] raddr_i,
  output logic [M-1:0]  rdata_o
);
  logic [M-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk) begin
    if (re_i) rdata_o <= mem[raddr_i];
  end
endmodule
