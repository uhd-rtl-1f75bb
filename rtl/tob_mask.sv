// tob_mask: hardwired masking logic for the threshold of binarization (TOB).
//
// The threshold TOB = H/2 is fixed at design time, so instead of a comparator
// or subtractor the counter bits B_1 (LSB) .. B_CW (MSB) feed one AND gate,
// each through an inverter where TOB has a 0 and directly where it has a 1.
// The AND is 1 exactly when the count equals TOB. Example from the paper:
// TOB = (00110)_2 inverts B_1, B_4 and B_5 and passes B_2 and B_3.
//
// Purely combinational.
module tob_mask #(
  parameter int unsigned CW  = uhd_pkg::cw_of(uhd_pkg::H_DEF),
  parameter int unsigned TOB = uhd_pkg::H_DEF / 2
) (
  input  logic [CW-1:0] count_i,
  output logic          hit_o
);
  localparam logic [CW-1:0] TOB_BITS = CW'(TOB);

  logic [CW-1:0] masked;

  for (genvar j = 0; j < int'(CW); j++) begin : g_mask
    if (TOB_BITS[j]) begin : g_pass
      assign masked[j] = count_i[j];
    end else begin : g_inv
      assign masked[j] = ~count_i[j];
    end
  end

  assign hit_o = &masked;

  initial assert (TOB < 2 ** CW) else $error("tob_mask: TOB does not fit in CW bits");
endmodule
