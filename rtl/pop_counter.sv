// pop_counter: POP++, the popcount counter of one hypervector dimension.
//
// Counts the logic-1 hypervector bits that arrive for one dimension while the
// pixels of the image are traversed. Its width is CW = ceil(log2 H) bits, as
// the paper sizes it for H incoming bits. The paper draws a chain of D
// flip-flops, each with its inverted output fed back; this version is a
// synchronous binary counter with the same count sequence, so that every
// flip-flop shares one clock.
//
// Timing: on a clock edge with valid_i high the counter loads bit_i when
// first_i is high (the first pixel of a new dimension) and otherwise adds
// bit_i. count_o is the registered count. Asynchronous active-low reset.
module pop_counter #(
  parameter int unsigned CW = uhd_pkg::cw_of(uhd_pkg::H_DEF)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_i,
  input  logic          first_i,
  input  logic          bit_i,
  output logic [CW-1:0] count_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          count_o <= '0;
    else if (valid_i) begin
      if (first_i)       count_o <= CW'(bit_i);
      else if (bit_i)    count_o <= count_o + 1'b1;
    end
  end
endmodule
