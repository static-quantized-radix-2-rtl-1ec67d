// twiddle_rom: twiddle factor generator of one pipeline stage.
//
// A stage that joins pairs of samples D apart needs the D factors
// W_{2D}^k = cos(2*pi*k/(2D)) - j*sin(2*pi*k/(2D)), k = 0..D-1. They are
// computed at elaboration time into a constant table and read out
// combinationally by k, so the block is a ROM of D complex words.
// The factors are the plain (forward) ones: conjugation for the inverse
// transform and quantization are done after the ROM by the stage.
// Interface: k in, w_re/w_im out (TW_FRAC fraction bits); combinational.
// Storing a table per stage is this design's choice; the processor's
// description names only a twiddle factor generator.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int unsigned D = 512   // half the butterfly span; last stage of 1024 points
) (
  input  logic [$clog2(D > 1 ? D : 2)-1:0] k,
  output tw_t                              w_re,
  output tw_t                              w_im
);

  typedef tw_t table_t [D];

  function automatic table_t make_cos();
    table_t t;
    for (int unsigned i = 0; i < D; i++) t[i] = tw_cos(i, 2 * D);
    return t;
  endfunction

  function automatic table_t make_sin();
    table_t t;
    for (int unsigned i = 0; i < D; i++) t[i] = tw_sin(i, 2 * D);
    return t;
  endfunction

  localparam table_t COS_T = make_cos();
  localparam table_t SIN_T = make_sin();

  always_comb begin
    if (D == 1) begin
      w_re = COS_T[0];
      w_im = SIN_T[0];
    end else begin
      w_re = COS_T[k];
      w_im = SIN_T[k];
    end
  end

endmodule
