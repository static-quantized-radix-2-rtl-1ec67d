// quantizer: static quantizer applied to one real component of a twiddle factor.
//
// Two characteristics are provided, selected by the MODE parameter:
//  * Q_UNIFORM: the staircase Q(x) = q * round(x / q) with q = 2^-bits, the
//    uniform quantizer whose error h = x - Q(x) is bounded by q/2.
//  * Q_FLOAT (default): quantization of the mantissa only. Writing
//    x = 2^e * M with 1/2 <= |M| < 1, the result is 2^e * Q(M) with Q the
//    uniform quantizer of step 2^-bits. It is built as a compressor (leading
//    one detector that finds e), a uniform rounding of the magnitude at the
//    bit that the exponent selects, and an expander (the shift back), so the
//    relative error, not the absolute one, is bounded.
// Rounding is to nearest with ties away from zero; a magnitude rounded above
// 1.0 is held at 1.0, since no twiddle factor exceeds it. When en is low, or
// bits leaves nothing to remove, the input passes unchanged.
// Interface: x, en and bits in, y out; purely combinational.
// The two characteristics follow the uniform and non-uniform models of the
// processor's description; the rounding rule, the bit-count encoding and the
// clamp at 1.0 are this design's choices.
module quantizer
  import fft_pkg::*;
#(
  parameter qmode_e MODE = Q_FLOAT
) (
  input  tw_t    x,
  input  logic   en,
  input  qbits_t bits,   // resolution b: step 2^-b (uniform) or b mantissa bits (float)
  output tw_t    y
);

  localparam int unsigned MW = TW_W + 1;   // magnitude with one spare bit

  logic [MW-1:0] mag, half, mask, rnd;
  int            lead;   // position of the leading one of mag (compressor)
  int            shift;  // number of low bits removed

  always_comb begin
    mag = x[TW_W-1] ? MW'(-x) : MW'(x);

    // compressor: exponent of the magnitude
    lead = 0;
    for (int i = 0; i < MW; i++)
      if (mag[i]) lead = i;

    if (MODE == Q_UNIFORM) shift = int'(TW_FRAC) - int'(bits);
    else                   shift = lead + 1 - int'(bits);
    if (shift > int'(MW) - 1) shift = int'(MW) - 1;

    // uniform rounding at the selected bit, then expander
    half = '0;
    mask = '1;
    if (!en || shift <= 0 || mag == '0) begin
      rnd = mag;
    end else begin
      half = MW'(1) << (shift - 1);
      mask = ~((MW'(1) << shift) - MW'(1));
      rnd  = (mag + half) & mask;
      if (rnd > MW'(2 ** TW_FRAC)) rnd = MW'(2 ** TW_FRAC);
    end

    y = x[TW_W-1] ? tw_t'(-rnd) : tw_t'(rnd);
  end

endmodule
