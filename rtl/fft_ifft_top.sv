// fft_ifft_top: pipelined 2**LOG2N-point (default 1024) radix-2 DIT FFT/IFFT processor
// with programmable twiddle-factor quantization.
//
// Data path:  input_stage -> fft_stage[0] -> ... -> fft_stage[LOG2N-1] -> output_stage
//   input_stage   collects a serial frame, scales it by 1/N for the IFFT and feeds it in
//                 bit-reversed order as two parallel paths (the demux),
//   fft_stage[s]  twiddle generator, quantizer, conjugation for the IFFT, butterfly with
//                 output registers and, except in the last stage, the shuffling unit that
//                 re-pairs the results for stage s+1,
//   output_stage  merges the two result paths into one serial stream in natural order.
//
// Interface: one complex IW-bit sample per clock at most on in_valid/in_re/in_im; every N
// valid samples form a frame. inverse (0 FFT, 1 IFFT), q_en (twiddle quantization on) and
// q_mode (uniform or floating-point characteristic) are sampled with a frame's first sample
// and travel with it, so they may change from one frame to the next. q_bits[s] is the static
// quantizer resolution (bits) of stage s. Results leave one per clock on out_valid/out_re/
// out_im with out_index = k (0..N-1) and out_sof on X[0]; they are DW-bit numbers with LOG2N
// fraction bits:  FFT   out = X[k] * 2**LOG2N,    X[k] = sum_n x[n] W_N^(kn)
//                 IFFT  out = x[n] * 2**LOG2N,    x[n] = (1/N) sum_k X[k] W_N^(-kn).
// Timing: the butterflies handle two samples per clock, so a frame passes the ten stages in
// N/2 clocks. X[0] of a frame is on the outputs LOG2N + N/2 + 2 clock edges after the edge
// that took the frame's last sample (2 in the input stage, 1 per butterfly, 2**s in the
// shuffler of stage s, 1 in the output stage): 524 clocks for N = 1024. With continuous input
// the result stream is continuous too.
//
// The ten-stage pipeline, the stage contents and the control lines follow the paper; the
// word widths, the buffering at the two ends and the handshake are this design's choices.
module fft_ifft_top
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = LOG2N_DEF,
  parameter int unsigned IW    = IW_DEF,
  parameter int unsigned TW    = TW_DEF,
  parameter int unsigned TF    = TF_DEF,
  localparam int unsigned DW   = data_width(LOG2N, IW)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control lines
  input  logic                 inverse,
  input  logic                 q_en,
  input  qmode_e               q_mode,
  input  logic [QBW-1:0]       q_bits [LOG2N],
  // serial input
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_re,
  input  logic signed [IW-1:0] in_im,
  // serial output
  output logic                 out_valid,
  output logic                 out_sof,
  output logic                 out_inverse,
  output logic [LOG2N-1:0]     out_index,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im,
  output logic                 overflow
);
  ctrl_t in_ctrl;
  assign in_ctrl = '{inverse: inverse, q_en: q_en, q_mode: q_mode};

  // stage boundary signals: index s is the input of stage s, index LOG2N the output
  logic                 v   [LOG2N+1];
  logic                 sof [LOG2N+1];
  ctrl_t                ct  [LOG2N+1];
  logic signed [DW-1:0] ar  [LOG2N+1];
  logic signed [DW-1:0] ai  [LOG2N+1];
  logic signed [DW-1:0] br  [LOG2N+1];
  logic signed [DW-1:0] bi  [LOG2N+1];

  input_stage #(.LOG2N(LOG2N), .IW(IW), .DW(DW)) u_in (
    .clk, .rst_n, .in_valid, .in_re, .in_im, .in_ctrl,
    .out_valid(v[0]), .out_sof(sof[0]), .out_ctrl(ct[0]),
    .a_re(ar[0]), .a_im(ai[0]), .b_re(br[0]), .b_im(bi[0]), .overflow);

  for (genvar s = 0; s < int'(LOG2N); s++) begin : g_stage
    fft_stage #(.LOG2N(LOG2N), .STAGE(s), .DW(DW), .TW(TW), .TF(TF),
                .LAST(s == int'(LOG2N) - 1)) u_stage (
      .clk, .rst_n, .q_bits(q_bits[s]),
      .in_valid(v[s]), .in_sof(sof[s]), .in_ctrl(ct[s]),
      .a_re(ar[s]), .a_im(ai[s]), .b_re(br[s]), .b_im(bi[s]),
      .out_valid(v[s+1]), .out_sof(sof[s+1]), .out_ctrl(ct[s+1]),
      .c_re(ar[s+1]), .c_im(ai[s+1]), .d_re(br[s+1]), .d_im(bi[s+1]));
  end

  ctrl_t out_ctrl;

  output_stage #(.LOG2N(LOG2N), .DW(DW)) u_out (
    .clk, .rst_n, .in_valid(v[LOG2N]), .in_sof(sof[LOG2N]), .in_ctrl(ct[LOG2N]),
    .c_re(ar[LOG2N]), .c_im(ai[LOG2N]), .d_re(br[LOG2N]), .d_im(bi[LOG2N]),
    .out_valid, .out_sof, .out_ctrl, .out_index, .out_re, .out_im);

  assign out_inverse = out_ctrl.inverse;
endmodule
