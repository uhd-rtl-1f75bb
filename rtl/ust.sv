// ust: Unary Stream Table, the associative fetch of unary bit-streams.
//
// Instead of a counter and a comparator per stream, every one of the xi = 2^M
// possible N-bit unary streams is stored once, U0 .. U(xi-1), and an M-bit
// scalar selects the stream with that many logic-1s. As in the table of the
// paper, the ones are right-aligned: U0 = 0...000, U1 = 0...001,
// U2 = 0...011, so U_k = 2^k - 1. With N = 2^M the top bit is always 0.
//
// Two read ports fetch the data stream and the Sobol stream in the same cycle.
// The table is hardwired from that formula; the reads are
// combinational.
module ust #(
  parameter int unsigned M = uhd_pkg::M_DEF,
  parameter int unsigned N = uhd_pkg::N_DEF
) (
  input  logic [M-1:0] idx_a_i,
  input  logic [M-1:0] idx_b_i,
  output logic [N-1:0] stream_a_o,
  output logic [N-1:0] stream_b_o
);
  localparam int unsigned XI = 2 ** M;

  // table rows U_k = 2^k - 1, held as constant registers
  logic [N-1:0] table_w [XI];

  for (genvar k = 0; k < int'(XI); k++) begin : g_row
    for (genvar j = 0; j < int'(N); j++) begin : g_bit
      assign table_w[k][j] = (j < k) ? 1'b1 : 1'b0;
    end
  end

  assign stream_a_o = table_w[idx_a_i];
  assign stream_b_o = table_w[idx_b_i];

  initial assert (N >= XI - 1) else $error("ust: N must hold 2^M - 1 ones");
endmodule
