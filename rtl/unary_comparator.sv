// unary_comparator: comparator of two unary bit-streams of equal length.
//
// Produces one hypervector bit: 1 when the first operand (data) is greater
// than or equal to the second (Sobol), else 0. Gate structure as drawn in the
// paper: a bitwise AND of the two streams gives the minimum (unary streams of
// one length are correlated), the inverted Sobol stream is ORed bitwise with
// that minimum, and an N-input AND of the result is 1 only when every position
// is 1, that is when the minimum equals the Sobol stream.
// Example (N = 7): data 0000011 (2), Sobol 0011111 (5): minimum 0000011,
// inverted Sobol 1100000, OR 1100011, AND = 0 since 2 < 5.
//
// Purely combinational.
module unary_comparator #(
  parameter int unsigned N = uhd_pkg::N_DEF
) (
  input  logic [N-1:0] data_i,
  input  logic [N-1:0] sobol_i,
  output logic         ge_o
);
  logic [N-1:0] minimum;
  logic [N-1:0] sobol_n;
  logic [N-1:0] ored;

  always_comb begin
    minimum = data_i & sobol_i;
    sobol_n = ~sobol_i;
    ored    = minimum | sobol_n;
    ge_o    = &ored;
  end
endmodule
