// fft_stage: one pipeline stage of the radix-2 DIT FFT/IFFT processor.
//
// Stage s (0..LOG2N-1) combines frame positions m and m + 2**s. Its input pairs arrive one per
// clock with time index t (0..N/2-1, restarting at in_sof); the pair at time t needs the
// twiddle factor W_N^e with e = (t mod 2**s) * N / 2**(s+1), which is entry t mod 2**s of
// this stage's twiddle table. The stage:
//   1. reads cos/sin from its twiddle generator,
//   2. quantizes both (quantizer enable, characteristic and resolution q_bits),
//   3. forms W = cos - j*sin for the FFT, or its conjugate cos + j*sin for the IFFT,
//   4. runs the butterfly (one clock, registered),
//   5. for all but the last stage, re-pairs the results for stage s+1 in the shuffler
//      (2**s clocks).
// Latency: 1 + 2**s clocks (1 for the last stage). The control lines travel with the data, so
// every frame is processed with the controls it entered with. q_bits is static: it sets this
// stage's quantizer interval.
//
// The stage content (twiddle factors, quantizer, conjugation for IFFT, butterfly, shuffling
// unit) follows the paper; the order of quantizer and conjugation follows its flowchart.
module fft_stage
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = 10,
  parameter int unsigned STAGE = 0,
  parameter int unsigned DW    = 37,
  parameter int unsigned TW    = 16,
  parameter int unsigned TF    = 14,
  parameter bit          LAST  = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [QBW-1:0]       q_bits,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  ctrl_t                in_ctrl,
  input  logic signed [DW-1:0] a_re, a_im,
  input  logic signed [DW-1:0] b_re, b_im,
  output logic                 out_valid,
  output logic                 out_sof,
  output ctrl_t                out_ctrl,
  output logic signed [DW-1:0] c_re, c_im,
  output logic signed [DW-1:0] d_re, d_im
);
  localparam int unsigned TBITS = LOG2N - 1;
  localparam int unsigned AW    = (STAGE > 0) ? STAGE : 1;

  logic [TBITS-1:0]     t_q, t_cur;
  logic [AW-1:0]        tw_idx;
  logic signed [TW-1:0] cos_w, sin_w, cos_q, sin_q, w_re, w_im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        t_q <= '0;
    else if (in_valid) t_q <= in_sof ? TBITS'(1) : t_q + 1'b1;
  end
  assign t_cur  = in_sof ? '0 : t_q;
  assign tw_idx = (STAGE > 0) ? AW'(t_cur) : '0;

  twiddle_gen #(.LOG2L(STAGE), .TW(TW), .TF(TF)) u_tw (
    .idx(tw_idx), .cos_o(cos_w), .sin_o(sin_w));

  quantizer #(.W(TW), .F(TF)) u_q_re (
    .din(cos_w), .en(in_ctrl.q_en), .mode(in_ctrl.q_mode), .bits(q_bits), .dout(cos_q));
  quantizer #(.W(TW), .F(TF)) u_q_im (
    .din(sin_w), .en(in_ctrl.q_en), .mode(in_ctrl.q_mode), .bits(q_bits), .dout(sin_q));

  // W = cos - j sin (FFT); conjugate W* = cos + j sin (IFFT)
  assign w_re = cos_q;
  assign w_im = in_ctrl.inverse ? sin_q : -sin_q;

  logic                 bf_valid, bf_sof;
  ctrl_t                bf_ctrl;
  logic signed [DW-1:0] y0_re, y0_im, y1_re, y1_im;

  butterfly #(.DW(DW), .TW(TW), .TF(TF)) u_bf (
    .clk, .rst_n, .in_valid, .in_sof, .in_ctrl,
    .a_re, .a_im, .b_re, .b_im, .w_re, .w_im,
    .out_valid(bf_valid), .out_sof(bf_sof), .out_ctrl(bf_ctrl),
    .y0_re, .y0_im, .y1_re, .y1_im);

  if (LAST) begin : g_last
    assign out_valid = bf_valid;
    assign out_sof   = bf_sof;
    assign out_ctrl  = bf_ctrl;
    assign c_re = y0_re; assign c_im = y0_im;
    assign d_re = y1_re; assign d_im = y1_im;
  end else begin : g_shuf
    shuffler #(.DW(DW), .LOG2D(STAGE), .TBITS(TBITS)) u_shuf (
      .clk, .rst_n, .in_valid(bf_valid), .in_sof(bf_sof), .in_ctrl(bf_ctrl),
      .a_re(y0_re), .a_im(y0_im), .b_re(y1_re), .b_im(y1_im),
      .out_valid, .out_sof, .out_ctrl, .c_re, .c_im, .d_re, .d_im);
  end
endmodule
