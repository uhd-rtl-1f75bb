// accum_binarize: accumulate-and-binarize of one hypervector dimension.
//
// The level hypervector bits of all H pixels for one dimension arrive one per
// valid cycle. POP++ (pop_counter) counts the ones, and the hardwired masking
// logic (tob_mask) watches the count for the threshold TOB = H/2. Binarization
// thus happens on the spot while counting: no subtractor or comparator runs
// after the count. The decision is "ones in majority": sign 1 when the count
// reaches TOB, else 0.
//
// The masking AND is 1 only while the count equals TOB, and the count keeps
// rising past it, so a sticky flip-flop remembers that TOB was reached; that
// flip-flop is this design's addition to the drawn circuit. It is cleared
// together with the counter on the first bit of a dimension.
//
// Timing: bits enter with valid_i, first_i marks a dimension's first bit.
// sign_o is valid in the cycle after the last bit of the dimension was
// accepted, and stays so until the next first_i bit is accepted (it may be
// sampled in that same cycle). count_o is the counter state.
module accum_binarize #(
  parameter int unsigned H   = uhd_pkg::H_DEF,
  parameter int unsigned TOB = H / 2,
  localparam int unsigned CW = uhd_pkg::cw_of(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_i,
  input  logic          first_i,
  input  logic          bit_i,
  output logic [CW-1:0] count_o,
  output logic          sign_o
);
  logic hit;
  logic reached_q;

  pop_counter #(.CW(CW)) u_pop (
    .clk    (clk),
    .rst_n  (rst_n),
    .valid_i(valid_i),
    .first_i(first_i),
    .bit_i  (bit_i),
    .count_o(count_o)
  );

  tob_mask #(.CW(CW), .TOB(TOB)) u_mask (
    .count_i(count_o),
    .hit_o  (hit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  reached_q <= 1'b0;
    else if (valid_i && first_i) reached_q <= 1'b0;
    else if (hit)                reached_q <= 1'b1;
  end

  assign sign_o = reached_q | hit;
endmodule
