// tb_fft_top: end-to-end test of the processor at 32 points (five stages).
//
// Feeds a sequence of frames through the valid/ready input: FFT and IFFT
// frames, with and without twiddle quantization (4-bit mantissas in every
// stage), back to back so that the input stage applies backpressure, then
// after a pause so that empty slots pass through the pipeline. For every
// output sample it
//  * compares the result with a bit-exact integer model of the transform,
//  * drives the ideal double-precision DFT/IDFT into the reference port,
// and at the end of every frame checks the output stage's error sums against
// sums computed here, that unquantized frames stay within rounding noise and
// quantized frames lose accuracy. Also checks the pipeline latency of
// N + LOG2N - 1 clocks and counts each mechanism exercised: FFT, IFFT,
// quantized, unquantized frames, mode switches, stalls and empty slots.
module tb_fft_top;
  import fft_pkg::*;
  import tb_fft_model_pkg::*;

  localparam int L = 5, N = 1 << L, FRAMES = 8, QB = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, sel_ifft, q_enable;
  logic signed [IN_W-1:0] in_re, in_im;
  qbits_t q_bits [L];
  data_t ref_re, ref_im, err_re, err_im;
  sample_t res_pre, res_s;
  logic stats_valid, stats_ifft;
  logic signed [ACC_W-1:0] err_sum_re, err_sum_im;
  logic [ACC_W-1:0] err_energy, ref_energy;

  fft_top #(.LOG2N(L)) dut (.*);

  always #5 clk = ~clk;

  int  fx_re [FRAMES][], fx_im [FRAMES][];
  bit  f_ifft [FRAMES], f_qen [FRAMES];
  cvec_t mod_re [FRAMES], mod_im [FRAMES], id_re [FRAMES], id_im [FRAMES];
  int  n_fft = 0, n_ifft = 0, n_q = 0, n_noq = 0, n_switch = 0, n_stall = 0, n_bubble = 0;
  int  cyc = 0, t_in_sof = -1, t_out_sof = -1;
  real rel_noq = 0.0, rel_q = 1.0;
  int  n_stats = 0;

  typedef logic signed [127:0] wide_t;   // sums of squares exceed 64 bits at 1024 points
  typedef struct {
    wide_t  sr, si, ee, re;
    bit     ifft, qen;
    int     f;
  } stats_t;
  stats_t exp_q [$];

  // per-frame statistics from the output stage, one clock after a frame's last result
  always @(negedge clk) begin
    if (rst_n && stats_valid) begin
      stats_t e;
      real rel;
      n_stats++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL statistics without a frame");
      end else begin
        e = exp_q.pop_front();
        if (stats_ifft != e.ifft || wide_t'(err_sum_re) != e.sr || wide_t'(err_sum_im) != e.si ||
            err_energy != ACC_W'(e.ee) || ref_energy != ACC_W'(e.re)) begin
          failures++;
          $display("FAIL frame %0d stats: %0d/%0d %0d/%0d", e.f, err_sum_re, e.sr, err_energy, e.ee);
        end
        rel = real'(e.ee) / real'(e.re);
        $display("frame %0d %s quantized=%0d error/signal energy %e", e.f, e.ifft ? "IFFT" : "FFT ", e.qen, rel);
        checks++;
        if (!e.qen && rel > 1e-6) begin failures++; $display("FAIL unquantized error too large"); end
        if (!e.qen && rel > rel_noq) rel_noq = rel;
        if (e.qen && rel < rel_q) rel_q = rel;
      end
    end
  end

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(200 * N * FRAMES * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus and expected results
  initial begin
    int qb [];
    qb = new[L];
    foreach (qb[s]) qb[s] = QB;
    foreach (q_bits[s]) q_bits[s] = qbits_t'(QB);
    for (int f = 0; f < FRAMES; f++) begin
      fx_re[f] = new[N];
      fx_im[f] = new[N];
      f_ifft[f] = (f % 4) >= 2;        // FFT, FFT, IFFT, IFFT, ...
      f_qen[f]  = f[0];                // quantizer off, on, off, on, ...
      for (int i = 0; i < N; i++) begin
        // a two-tone signal plus noise, below full scale
        real v = 0.4 * $cos(2.0 * PI * 3 * i / N + f) + 0.3 * $sin(2.0 * PI * 7 * i / N);
        fx_re[f][i] = int'(v * 32767.0 * 0.9) + int'($urandom_range(0, 200)) - 100;
        fx_im[f][i] = int'(0.5 * $sin(2.0 * PI * 5 * i / N - f) * 32767.0) + int'($urandom_range(0, 200)) - 100;
      end
      ref_fft_fixed(L, f_ifft[f], f_qen[f], qb, 1'b1, fx_re[f], fx_im[f], mod_re[f], mod_im[f]);
      ref_dft(L, f_ifft[f], fx_re[f], fx_im[f], id_re[f], id_im[f]);
    end
    in_valid = 0; in_re = 0; in_im = 0; sel_ifft = 0; q_enable = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      if (f == FRAMES - 3) begin in_valid = 0; repeat (3 * N + N / 2) @(posedge clk); #1; end  // pause, off the slot grid
      for (int i = 0; i < N; i++) begin
        in_valid = 1;
        in_re    = IN_W'(fx_re[f][i]);
        in_im    = IN_W'(fx_im[f][i]);
        sel_ifft = f_ifft[f];
        q_enable = f_qen[f];
        @(posedge clk);
        while (!in_ready) begin n_stall++; @(posedge clk); end
        #1;
      end
    end
    in_valid = 0;
  end

  // latency: first sample out of the input stage to first result
  always @(posedge clk) begin
    if (dut.u_in.out_s.valid && dut.u_in.out_s.sof && t_in_sof < 0) t_in_sof = cyc;
    if (res_pre.valid && res_pre.sof && t_out_sof < 0) t_out_sof = cyc;
  end

  // output checking; the reference is driven half a clock ahead of the edge
  initial begin
    int fo = 0, m = 0;
    wide_t  esr = 0, esi = 0, eee = 0, ere = 0;
    bit started = 0;
    ref_re = 0; ref_im = 0;
    while (fo < FRAMES) begin
      @(negedge clk);
      if (!res_pre.valid && started && m == 0) n_bubble++;
      if (res_pre.valid) begin
        longint dr, di;
        started = 1;
        if (m == 0) begin
          checks++;
          if (!res_pre.sof) begin failures++; $display("FAIL frame %0d no sof", fo); end
        end
        ref_re = data_t'(id_re[fo][m]);
        ref_im = data_t'(id_im[fo][m]);
        checks++;
        if (longint'(res_pre.re) != mod_re[fo][m] || longint'(res_pre.im) != mod_im[fo][m] ||
            res_pre.ifft != f_ifft[fo] || res_pre.qen != f_qen[fo]) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d m %0d got %0d,%0d exp %0d,%0d", fo, m,
                                      res_pre.re, res_pre.im, mod_re[fo][m], mod_im[fo][m]);
        end
        dr = mod_re[fo][m] - id_re[fo][m];
        di = mod_im[fo][m] - id_im[fo][m];
        if (m == 0) begin esr = 0; esi = 0; eee = 0; ere = 0; end
        esr += dr; esi += di; eee += wide_t'(dr) * wide_t'(dr) + wide_t'(di) * wide_t'(di);
        ere += wide_t'(id_re[fo][m]) * wide_t'(id_re[fo][m]) + wide_t'(id_im[fo][m]) * wide_t'(id_im[fo][m]);
        m++;
        if (m == N) begin
          exp_q.push_back('{esr, esi, eee, ere, f_ifft[fo], f_qen[fo], fo});
          if (f_ifft[fo]) n_ifft++; else n_fft++;
          if (f_qen[fo]) n_q++; else n_noq++;
          if (fo > 0 && f_ifft[fo] != f_ifft[fo-1]) n_switch++;
          m = 0;
          fo++;
        end
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_stats != FRAMES) begin failures++; $display("FAIL %0d statistics reports", n_stats); end
    checks++;
    if (rel_q <= rel_noq) begin failures++; $display("FAIL quantization did not increase the error"); end
    checks++;
    if (t_out_sof - t_in_sof != N + L - 1) begin
      failures++; $display("FAIL latency %0d", t_out_sof - t_in_sof);
    end
    $display("mechanisms: fft=%0d ifft=%0d quantized=%0d unquantized=%0d mode_switches=%0d stalls=%0d empty_slot_cycles=%0d",
             n_fft, n_ifft, n_q, n_noq, n_switch, n_stall, n_bubble);
    checks += 7;
    if (n_fft == 0)    failures++;
    if (n_ifft == 0)   failures++;
    if (n_q == 0)      failures++;
    if (n_noq == 0)    failures++;
    if (n_switch == 0) failures++;
    if (n_stall == 0)  failures++;
    if (n_bubble == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
