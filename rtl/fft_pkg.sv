// fft_pkg: sizes and types shared by the pipelined radix-2 FFT/IFFT processor.
//
// Number formats (this design's choice; the reference model it follows works
// in double precision):
//  * Input samples are IN_W-bit signed fractions (Q1.15 for IN_W = 16).
//  * Inside the pipeline every real and imaginary part is a DATA_W-bit signed
//    integer whose LSB weighs 2^-(IN_W-1+MAX_LOG2N). An FFT input sample is
//    therefore shifted left by LOG2N bits on entry, while an IFFT input sample
//    is not shifted, which divides it by N exactly (the 1/N input scaling of
//    the IFFT). DATA_W leaves room for the growth by N*sqrt(2) of a full FFT.
//  * Twiddle factors are TW_W-bit signed numbers with TW_FRAC fraction bits,
//    so +1.0 is 2^TW_FRAC.
// A sample travels with four sideband flags: valid, start of frame, the
// FFT/IFFT selection of its frame and the quantizer enable of its frame.
package fft_pkg;

  localparam int unsigned MAX_LOG2N = 10;                 // 1024-point processor
  localparam int unsigned IN_W      = 16;                 // input sample width
  localparam int unsigned ACC_W     = 2 * (IN_W + 2 * MAX_LOG2N + 2) + MAX_LOG2N + 2;  // error sums
  localparam int unsigned DATA_W    = IN_W + 2 * MAX_LOG2N + 2; // 38 bits
  localparam int unsigned TW_W      = 16;                 // twiddle width
  localparam int unsigned TW_FRAC   = TW_W - 2;           // +1.0 = 16384
  localparam int unsigned QB_W      = 5;                  // width of a bit-count setting
  localparam real         PI        = 3.14159265358979323846;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [TW_W-1:0]   tw_t;
  typedef logic [QB_W-1:0]          qbits_t;

  // One complex sample with its sideband.
  typedef struct packed {
    logic  valid;  // sample carries data
    logic  sof;    // first sample of a frame
    logic  ifft;   // frame is an inverse transform
    logic  qen;    // frame uses quantized twiddle factors
    data_t re;
    data_t im;
  } sample_t;

  // Quantizer characteristic.
  typedef enum logic {
    Q_UNIFORM = 1'b0,  // uniform staircase of step 2^-b
    Q_FLOAT   = 1'b1   // b-bit mantissa rounding (compressor, Q, expander)
  } qmode_e;

  // Twiddle factor W_M^k = exp(-j*2*pi*k/M), rounded to TW_FRAC fraction bits.
  // Real-to-int casts round to nearest, ties away from zero.
  function automatic tw_t tw_cos(int unsigned k, int unsigned m);
    return tw_t'(int'($cos(2.0 * PI * real'(k) / real'(m)) * real'(2 ** TW_FRAC)));
  endfunction

  function automatic tw_t tw_sin(int unsigned k, int unsigned m);
    return tw_t'(int'(-$sin(2.0 * PI * real'(k) / real'(m)) * real'(2 ** TW_FRAC)));
  endfunction

endpackage
