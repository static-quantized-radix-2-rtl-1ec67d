// butterfly: radix-2 decimation-in-time butterfly.
//
// Computes X(k) = Xe(k) + W*Xo(k) and X(k+N/2) = Xe(k) - W*Xo(k): one complex
// multiplication of the odd input by the twiddle factor W, followed by one
// complex addition and one complex subtraction. The product is rounded back
// to the data format (round half up, by adding half an LSB before the
// arithmetic shift by TW_FRAC). No scaling is applied: the data word has the
// headroom for the growth of a full transform.
// Interface: xe, xo, w in; top (sum) and bot (difference) out; combinational.
// The structure is the processor's; the product rounding is this design's.
module butterfly
  import fft_pkg::*;
(
  input  data_t xe_re, xe_im,
  input  data_t xo_re, xo_im,
  input  tw_t   w_re,  w_im,
  output data_t top_re, top_im,
  output data_t bot_re, bot_im
);

  localparam int unsigned PW = DATA_W + TW_W + 1;
  typedef logic signed [PW-1:0] prod_t;

  prod_t pr, pi;   // full-precision W * Xo
  data_t mr, mi;   // rounded W * Xo

  always_comb begin
    pr = prod_t'(xo_re) * prod_t'(w_re) - prod_t'(xo_im) * prod_t'(w_im);
    pi = prod_t'(xo_re) * prod_t'(w_im) + prod_t'(xo_im) * prod_t'(w_re);
    mr = data_t'((pr + (prod_t'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC);
    mi = data_t'((pi + (prod_t'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC);
    top_re = xe_re + mr;
    top_im = xe_im + mi;
    bot_re = xe_re - mr;
    bot_im = xe_im - mi;
  end

endmodule
