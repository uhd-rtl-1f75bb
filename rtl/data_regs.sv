// data_regs: the processing-data registers (REGs) of the encoder.
//
// Holds the H quantized M-bit pixel (feature) values of the image being
// encoded, data1 .. dataH. The paper keeps these in registers because they are
// small next to the Sobol data. One synchronous write port loads a pixel per
// cycle; the read port is combinational (a register-file multiplexer), so
// rdata_o shows entry raddr_i in the same cycle. Reset clears every entry to
// level 0; the reset is this design's choice.
module data_regs #(
  parameter int unsigned H = uhd_pkg::H_DEF,
  parameter int unsigned M = uhd_pkg::M_DEF,
  localparam int unsigned AW = uhd_pkg::cw_of(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [M-1:0]  wdata_i,
  input  logic [AW-1:0] raddr_i,
  output logic [M-1:0]  rdata_o
);
  logic [M-1:0] regs_q [H];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(H); i++) regs_q[i] <= '0;
    end else if (we_i && (int'(waddr_i) < int'(H))) begin
      regs_q[waddr_i] <= wdata_i;
    end
  end

  always_comb begin
    rdata_o = '0;
    if (int'(raddr_i) < int'(H)) rdata_o = regs_q[raddr_i];
  end
endmodule
