// butterfly: radix-2 decimation-in-time butterfly with output pipeline registers.
//
//   y0 = a + W*b      (X(k)       = Xe(k) + W_N^k Xo(k))
//   y1 = a - W*b      (X(k + N/2) = Xe(k) - W_N^k Xo(k))
//
// One complex multiply (four real products) and two complex add/subtracts. W has TF
// fraction bits; the product is rounded to nearest (add half an LSB, shift right by TF)
// before the add/subtract so that a, b and the results share one DW-bit format. The data
// width carries enough guard bits that the results never overflow (see fft_pkg).
// The results, together with the valid/start-of-frame/control side band, are registered:
// latency one clock, one butterfly per clock.
//
// The butterfly equations and the pipeline register after the add/subtract follow the paper.
// The rounding of the product and the side band are this design's choices.
module butterfly
  import fft_pkg::*;
#(
  parameter int unsigned DW = 37,
  parameter int unsigned TW = 16,
  parameter int unsigned TF = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  ctrl_t                in_ctrl,
  input  logic signed [DW-1:0] a_re, a_im,
  input  logic signed [DW-1:0] b_re, b_im,
  input  logic signed [TW-1:0] w_re, w_im,
  output logic                 out_valid,
  output logic                 out_sof,
  output ctrl_t                out_ctrl,
  output logic signed [DW-1:0] y0_re, y0_im,
  output logic signed [DW-1:0] y1_re, y1_im
);
  localparam int unsigned PW = DW + TW + 1;

  logic signed [PW-1:0] bx_re, bx_im, wx_re, wx_im;  // operands widened to the product width
  logic signed [PW-1:0] p_re, p_im;
  logic signed [DW-1:0] t_re, t_im;   // W*b, rounded back to DW bits

  always_comb begin
    bx_re = PW'(b_re);
    bx_im = PW'(b_im);
    wx_re = PW'(w_re);
    wx_im = PW'(w_im);
    p_re = bx_re * wx_re - bx_im * wx_im;
    p_im = bx_re * wx_im + bx_im * wx_re;
    t_re = DW'((p_re + PW'(1 << (TF - 1))) >>> TF);
    t_im = DW'((p_im + PW'(1 << (TF - 1))) >>> TF);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_ctrl  <= '0;
      y0_re <= '0; y0_im <= '0; y1_re <= '0; y1_im <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid & in_sof;
      out_ctrl  <= in_ctrl;
      y0_re <= a_re + t_re;
      y0_im <= a_im + t_im;
      y1_re <= a_re - t_re;
      y1_im <= a_im - t_im;
    end
  end
endmodule
