// quantizer: programmable round-to-nearest quantizer for one twiddle-factor component.
//
// The input is a W-bit signed fixed-point number with F fraction bits. With en = 0 it passes
// unchanged. With en = 1 it is rounded to the nearest allowed level, ties away from zero
// (the rule is applied to the magnitude and the sign restored, so +x and -x stay symmetric):
//   Q_UNIFORM  uniform quantizer (fixed-point model): levels are multiples of q = 2**-bits,
//              i.e. the value keeps `bits` fraction bits. bits >= F leaves it unchanged.
//   Q_FLOAT    non-uniform quantizer (floating-point model): the magnitude is written as
//              2**e * M with M in [1/2, 1) (compressor), M is rounded to `bits` bits (uniform
//              Q on the mantissa) and 2**e is applied again (expander). The step is then
//              relative to the magnitude. bits must be at least 1.
// The result saturates at the largest positive W-bit value. Purely combinational.
//
// The two characteristics, the enable, and the resolution input follow the paper's
// quantizer models and its quantizer-enable switch and "quantizer interval" variable.
// The number format, the tie rule and the saturation are this design's choices.
module quantizer
  import fft_pkg::*;
#(
  parameter int unsigned W = 16,
  parameter int unsigned F = 14
) (
  input  logic signed [W-1:0] din,
  input  logic                en,
  input  qmode_e              mode,
  input  logic [QBW-1:0]      bits,
  output logic signed [W-1:0] dout
);
  localparam int unsigned PW = $clog2(W + 1);

  logic              neg;
  logic [W:0]        mag;     // |din|, one bit wider so that -2**(W-1) is representable
  logic [W+1:0]      mag_q;   // rounded magnitude, may carry into the next power of two
  logic [PW-1:0]     lead;    // position of the leading one of mag
  int unsigned       sh;      // number of low bits that are dropped

  always_comb begin
    neg  = din[W-1];
    mag  = neg ? (W+1)'(-{din[W-1], din}) : {1'b0, din};
    lead = '0;
    for (int i = 0; i <= int'(W); i++) if (mag[i]) lead = PW'(i);

    sh = 0;
    if (mode == Q_UNIFORM) begin
      if (int'(bits) < int'(F)) sh = F - int'(bits);
    end else if (mag != '0) begin
      // mantissa M = mag / 2**(lead+1) in [1/2, 1); keep `bits` bits of it
      if (int'(lead) + 1 > int'(bits)) sh = int'(lead) + 1 - int'(bits);
    end

    if (!en || sh == 0) begin
      mag_q = {1'b0, mag};
    end else begin
      mag_q = (({1'b0, mag} + ((W+2)'(1) << (sh - 1))) >> sh) << sh;
    end

    if (mag_q > (W+2)'((1 << (W - 1)) - 1) && !neg)
      dout = {1'b0, {(W-1){1'b1}}};
    else if (mag_q > (W+2)'(1 << (W - 1)))
      dout = {1'b1, {(W-1){1'b0}}};
    else
      dout = neg ? W'(-mag_q) : W'(mag_q);
  end
endmodule
