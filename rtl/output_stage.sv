// output_stage: comparison of the processor's result with an ideal transform.
//
// The processor is built to study how twiddle-factor quantization degrades
// an FFT/IFFT, so its output stage subtracts, sample by sample, an ideal
// (unquantized, high-precision) result supplied from outside on ref_re/ref_im
// in the same format and order, and gathers per-frame statistics of the
// difference:
//   err_sum    = sum of the error (real and imaginary)  -> mean
//   err_energy = sum of |error|^2                        -> variance
//   ref_energy = sum of |reference|^2                    -> SQNR = 10 log10(ref/err)
// The reference must be presented in the same cycle as the processor sample
// it belongs to. Outputs are registered: the processor sample and its error
// leave one clock after they enter; the statistics of a frame are held from
// the clock after its last sample until the next frame ends, flagged by a
// one-clock stats_valid pulse. Means, variances and logarithms are left to
// whoever reads the sums.
// The subtraction against an ideal transform follows the processor's
// description; the choice of sums to accumulate is this design's.
module output_stage
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = MAX_LOG2N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sample_t                 in_s,       // processor result
  input  data_t                   ref_re,     // ideal result, same sample
  input  data_t                   ref_im,
  output sample_t                 out_s,      // processor result, registered
  output data_t                   err_re,     // out_s - reference
  output data_t                   err_im,
  output logic                    stats_valid,
  output logic                    stats_ifft,
  output logic signed [ACC_W-1:0] err_sum_re,
  output logic signed [ACC_W-1:0] err_sum_im,
  output logic        [ACC_W-1:0] err_energy,
  output logic        [ACC_W-1:0] ref_energy
);

  localparam int unsigned N = 2 ** LOG2N;

  typedef logic signed [ACC_W-1:0] acc_t;

  data_t            d_re, d_im;
  acc_t             s_re, s_im, e_en, r_en;    // running sums of the current frame
  acc_t             n_re, n_im, n_een, n_ren;  // running sums including this sample
  logic [LOG2N-1:0] cnt, pos;
  logic             in_frame;

  always_comb begin
    d_re  = in_s.re - ref_re;
    d_im  = in_s.im - ref_im;
    pos   = in_s.sof ? '0 : cnt;
    n_re  = (in_s.sof ? acc_t'(0) : s_re) + acc_t'(d_re);
    n_im  = (in_s.sof ? acc_t'(0) : s_im) + acc_t'(d_im);
    n_een = (in_s.sof ? acc_t'(0) : e_en) + acc_t'(d_re) * acc_t'(d_re)
                                          + acc_t'(d_im) * acc_t'(d_im);
    n_ren = (in_s.sof ? acc_t'(0) : r_en) + acc_t'(ref_re) * acc_t'(ref_re)
                                          + acc_t'(ref_im) * acc_t'(ref_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_s       <= '0;
      err_re      <= '0;
      err_im      <= '0;
      s_re        <= '0;
      s_im        <= '0;
      e_en        <= '0;
      r_en        <= '0;
      cnt         <= '0;
      in_frame    <= 1'b0;
      stats_valid <= 1'b0;
      stats_ifft  <= 1'b0;
      err_sum_re  <= '0;
      err_sum_im  <= '0;
      err_energy  <= '0;
      ref_energy  <= '0;
    end else begin
      out_s       <= in_s;
      err_re      <= d_re;
      err_im      <= d_im;
      stats_valid <= 1'b0;
      if (in_s.valid && (in_s.sof || in_frame)) begin
        s_re <= n_re;
        s_im <= n_im;
        e_en <= n_een;
        r_en <= n_ren;
        cnt  <= pos + 1'b1;
        if (pos == LOG2N'(N - 1)) begin
          in_frame    <= 1'b0;
          stats_valid <= 1'b1;
          stats_ifft  <= in_s.ifft;
          err_sum_re  <= n_re;
          err_sum_im  <= n_im;
          err_energy  <= n_een;
          ref_energy  <= n_ren;
        end else begin
          in_frame <= 1'b1;
        end
      end
    end
  end

endmodule
