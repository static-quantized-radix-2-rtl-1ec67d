// fft_top: statically quantized 1024-point pipelined radix-2 FFT/IFFT processor.
//
// Structure: input stage -> LOG2N pipeline stages -> output stage.
//  * input_stage takes complex samples in natural order under a valid/ready
//    handshake, latches the FFT/IFFT and quantizer-enable switches per frame,
//    scales IFFT input by 1/N and emits each frame in bit-reversed order as a
//    continuous serial stream.
//  * fft_stage s (s = 1..LOG2N) is a radix-2 decimation-in-time stage with its
//    own twiddle generator, static twiddle quantizer (resolution q_bits[s-1]),
//    conjugation for the IFFT, butterfly and shuffling unit. A full N-point
//    transform streams through at one sample per clock.
//  * output_stage subtracts an externally supplied ideal result (ref_re,
//    ref_im) from each output sample and accumulates per-frame error sums.
// Timing: a frame's first result leaves the pipeline N + LOG2N - 1 clocks
// after its first sample left the input stage (stage s adds 2^(s-1) + 1);
// res_s is the output stage's registered copy, one clock later, with err_*.
// The reference for output sample m must be driven while res_pre (the
// pipeline output, index m counted from its sof flag) is valid.
// Results are in natural order, LSB weight 2^-(IN_W-1+LOG2N); FFT outputs are
// the unnormalised sums, IFFT outputs include the 1/N factor.
// q_bits is static configuration: change it only when the pipeline is empty.
module fft_top
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = MAX_LOG2N,   // 10: 1024 points, ten stages
  parameter qmode_e      QMODE = Q_FLOAT      // quantizer characteristic
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // sample input
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  // control lines
  input  logic                    sel_ifft,
  input  logic                    q_enable,
  input  qbits_t                  q_bits [LOG2N],
  // ideal reference for the sample on res_pre
  input  data_t                   ref_re,
  input  data_t                   ref_im,
  // results
  output sample_t                 res_pre,    // pipeline output, before comparison
  output sample_t                 res_s,      // result, registered with its error
  output data_t                   err_re,
  output data_t                   err_im,
  output logic                    stats_valid,
  output logic                    stats_ifft,
  output logic signed [ACC_W-1:0] err_sum_re,
  output logic signed [ACC_W-1:0] err_sum_im,
  output logic        [ACC_W-1:0] err_energy,
  output logic        [ACC_W-1:0] ref_energy
);

  sample_t link [LOG2N+1];

  input_stage #(.LOG2N(LOG2N)) u_in (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_re(in_re), .in_im(in_im),
    .sel_ifft(sel_ifft), .q_enable(q_enable),
    .out_s(link[0])
  );

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    fft_stage #(.D(2 ** s), .MODE(QMODE)) u_stage (
      .clk(clk), .rst_n(rst_n), .q_bits(q_bits[s]),
      .in_s(link[s]), .out_s(link[s+1])
    );
  end

  assign res_pre = link[LOG2N];

  output_stage #(.LOG2N(LOG2N)) u_out (
    .clk(clk), .rst_n(rst_n),
    .in_s(link[LOG2N]), .ref_re(ref_re), .ref_im(ref_im),
    .out_s(res_s), .err_re(err_re), .err_im(err_im),
    .stats_valid(stats_valid), .stats_ifft(stats_ifft),
    .err_sum_re(err_sum_re), .err_sum_im(err_sum_im),
    .err_energy(err_energy), .ref_energy(ref_energy)
  );

endmodule
