// fft_pkg: constants and types shared by the pipelined radix-2 FFT/IFFT processor.
//
// The processor transforms frames of N = 2**LOG2N complex samples (1024 by default, the size
// the design is built around). Samples enter as IW-bit signed integers. Inside the pipeline
// every value is a DW-bit two's-complement number with LOG2N fraction bits: the LOG2N fraction
// bits make the IFFT input scaling by 1/N exact, and LOG2N+1 integer guard bits absorb the
// growth of an unscaled FFT (|X[k]| <= N * sqrt(2) * max|x|), so no stage ever overflows.
// Twiddle factors are TW-bit signed numbers with TF fraction bits (1.0 = 2**TF).
// The sample, twiddle and guard widths are this design's choice; the paper gives only N.
package fft_pkg;

  // Default transform size: N = 1024 points, ten radix-2 stages.
  parameter int unsigned LOG2N_DEF = 10;
  // Input sample width (real and imaginary part each).
  parameter int unsigned IW_DEF = 16;
  // Twiddle factor width and its fraction bits.
  parameter int unsigned TW_DEF = 16;
  parameter int unsigned TF_DEF = 14;
  // Width of the quantizer resolution field (number of bits b, 0..31).
  parameter int unsigned QBW = 5;

  // Internal data width for a given transform and sample size.
  function automatic int unsigned data_width(int unsigned log2n, int unsigned iw);
    return iw + 2 * log2n + 1;
  endfunction

  // Quantizer characteristic: uniform steps (fixed-point model, Fig. 6 of the method) or
  // steps relative to the magnitude (floating-point model: compressor, Q, expander).
  typedef enum logic {
    Q_UNIFORM = 1'b0,
    Q_FLOAT   = 1'b1
  } qmode_e;

  // Control lines that travel with each frame through the pipeline.
  typedef struct packed {
    logic   inverse;  // 1: IFFT (conjugate twiddles, input scaled by 1/N), 0: FFT
    logic   q_en;     // 1: twiddle factors are quantized
    qmode_e q_mode;   // quantizer characteristic
  } ctrl_t;

endpackage
