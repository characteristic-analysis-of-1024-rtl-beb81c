// twiddle_gen: twiddle factor generator of one radix-2 DIT stage.
//
// The stage with butterfly span L = 2**LOG2L multiplies by W_{2L}^i = exp(-j*pi*i/L),
// i = 0..L-1 (equal to W_N^(i*N/(2L))). This block is a read-only table of those L factors,
// indexed by i, giving cos(pi*i/L) and sin(pi*i/L) as TW-bit signed numbers with TF fraction
// bits, rounded to nearest. The caller forms W = cos - j*sin (FFT) or its conjugate (IFFT).
// The table is computed at elaboration from $cos/$sin, so no data file is needed, and the
// lookup is combinational. Stage 0 (L = 1) has the single factor 1.
//
// A per-stage twiddle generator follows the paper; a stored table (rather than a recursive or
// CORDIC generator) and the number format are this design's choices.
module twiddle_gen #(
  parameter int unsigned LOG2L = 4,
  parameter int unsigned TW    = 16,
  parameter int unsigned TF    = 14,
  localparam int unsigned L    = 1 << LOG2L,
  localparam int unsigned AW   = (LOG2L > 0) ? LOG2L : 1
) (
  input  logic [AW-1:0]        idx,
  output logic signed [TW-1:0] cos_o,
  output logic signed [TW-1:0] sin_o
);
  typedef logic signed [TW-1:0] tab_t [L];

  function automatic tab_t make_table(bit want_sin);
    tab_t t;
    real  ang, v;
    for (int i = 0; i < int'(L); i++) begin
      ang  = 3.14159265358979323846 * real'(i) / real'(L);
      v    = (want_sin ? $sin(ang) : $cos(ang)) * real'(64'd1 << TF);
      t[i] = TW'($rtoi(v >= 0.0 ? $floor(v + 0.5) : -$floor(-v + 0.5)));
    end
    return t;
  endfunction

  localparam tab_t COS_TAB = make_table(1'b0);
  localparam tab_t SIN_TAB = make_table(1'b1);

  always_comb begin
    if (LOG2L == 0) begin
      cos_o = COS_TAB[0];
      sin_o = SIN_TAB[0];
    end else begin
      cos_o = COS_TAB[idx[AW-1:0] & AW'(L - 1)];
      sin_o = SIN_TAB[idx[AW-1:0] & AW'(L - 1)];
    end
  end
endmodule
