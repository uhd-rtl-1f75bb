// encoder_ctrl: traversal sequencer of the uHD encoder.
//
// Encoding one image needs, for each of the D hypervector dimensions d, the
// level bit of every pixel i: data_i compared with the d-th scalar of Sobol
// sequence S_i (the pixel's index picks its sequence, so no position
// hypervector is used). This controller walks dimension by dimension and,
// inside one dimension, pixel by pixel, so that a single POP++ counter with
// its masking logic decides one class-hypervector bit after H pixels. The
// traversal order and the one-bit-per-cycle rate are this design's choices;
// the paper only shows that the pixels are traversed for accumulation.
//
// Pipeline, one (pixel, dimension) beat per cycle, H * D beats per image:
//   stage 0  pix_o / sobol_addr_o / sobol_re_o address the data registers and
//            the Sobol BRAM (address i * D + d).
//   stage 1  BRAM word and data value are available (the top registers the
//            data value); s1_valid_o, s1_first_o, s1_last_o qualify them.
//   stage 2  out_valid_o: the sign bit of dimension out_dim_o is ready.
// done_o pulses with the last out_valid_o, H * D + 1 clock edges after the
// edge that samples start_i. start_i is accepted only when
// busy_o is low. Asynchronous active-low reset to idle.
module encoder_ctrl #(
  parameter int unsigned H = uhd_pkg::H_DEF,
  parameter int unsigned D = uhd_pkg::D_DEF,
  localparam int unsigned PW = uhd_pkg::cw_of(H),
  localparam int unsigned DW = uhd_pkg::cw_of(D),
  localparam int unsigned AW = uhd_pkg::cw_of(H * D)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  output logic          busy_o,
  output logic          done_o,
  // stage 0
  output logic [PW-1:0] pix_o,
  output logic          sobol_re_o,
  output logic [AW-1:0] sobol_addr_o,
  // stage 1
  output logic          s1_valid_o,
  output logic          s1_first_o,
  output logic          s1_last_o,
  // stage 2
  output logic          out_valid_o,
  output logic [DW-1:0] out_dim_o
);
  typedef enum logic [1:0] {IDLE, RUN, DRAIN} state_e;

  state_e        state_q;
  logic [PW-1:0] pix_q;
  logic [DW-1:0] dim_q;
  logic [DW-1:0] s1_dim_q;
  logic          issue;
  logic          pix_end;
  logic          dim_end;

  assign issue   = (state_q == RUN);
  assign pix_end = (int'(pix_q) == int'(H) - 1);
  assign dim_end = (int'(dim_q) == int'(D) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      pix_q   <= '0;
      dim_q   <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (start_i) begin
          state_q <= RUN;
          pix_q   <= '0;
          dim_q   <= '0;
        end
        RUN: begin
          if (pix_end) begin
            pix_q <= '0;
            if (dim_end) state_q <= DRAIN;
            else         dim_q   <= dim_q + 1'b1;
          end else begin
            pix_q <= pix_q + 1'b1;
          end
        end
        DRAIN: if (done_o) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  // stage 0 outputs
  assign pix_o        = pix_q;
  assign sobol_re_o   = issue;
  assign sobol_addr_o = AW'(pix_q) * AW'(D) + AW'(dim_q);

  // stage 1 and stage 2 qualifiers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid_o  <= 1'b0;
      s1_first_o  <= 1'b0;
      s1_last_o   <= 1'b0;
      s1_dim_q    <= '0;
      out_valid_o <= 1'b0;
      out_dim_o   <= '0;
    end else begin
      s1_valid_o  <= issue;
      s1_first_o  <= issue && (pix_q == '0);
      s1_last_o   <= issue && pix_end;
      s1_dim_q    <= dim_q;
      out_valid_o <= s1_valid_o && s1_last_o;
      out_dim_o   <= s1_dim_q;
    end
  end

  assign done_o = out_valid_o && (int'(out_dim_o) == int'(D) - 1);
  assign busy_o = (state_q != IDLE);

  // the drain state is left only through the last sign bit
  a_done_in_drain: assert property (@(posedge clk) disable iff (!rst_n)
                                    done_o |-> state_q == DRAIN);
endmodule
