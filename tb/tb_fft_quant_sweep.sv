// tb_fft_quant_sweep: the resolution sweep at the default size.
//
// Two 1024-point processors, one with mantissa (floating-point) twiddle
// quantization and one with uniform quantization, transform the same frame
// with the twiddle resolution b set to 1, 2, ... 10 bits in every stage
// (and once unquantized). For each b the pipeline is drained before q_bits
// changes. Every result is checked bit-exactly against the integer model;
// the error energy relative to the ideal DFT is printed for both quantizers,
// and the run checks that it falls as b grows (b = 10 below b = 5 below
// b = 1), that quantization costs accuracy and that at equal b the mantissa
// quantizer is no worse than the uniform one.
module tb_fft_quant_sweep;
  import fft_pkg::*;
  import tb_fft_model_pkg::*;

  localparam int L = 10, N = 1 << L, BMAX = 10;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic in_valid, sel_ifft, q_enable;
  logic in_ready_f, in_ready_u;
  logic signed [IN_W-1:0] in_re, in_im;
  qbits_t q_bits [L];
  data_t ref_re, ref_im;
  data_t err_re_f, err_im_f, err_re_u, err_im_u;
  sample_t pre_f, pre_u, res_f, res_u;
  logic sv_f, sv_u, si_f, si_u;
  logic signed [ACC_W-1:0] esr_f, esi_f, esr_u, esi_u;
  logic [ACC_W-1:0] ee_f, re_f, ee_u, re_u;

  fft_top dut_f (.clk, .rst_n, .in_valid, .in_ready(in_ready_f), .in_re, .in_im,
                 .sel_ifft, .q_enable, .q_bits, .ref_re, .ref_im,
                 .res_pre(pre_f), .res_s(res_f), .err_re(err_re_f), .err_im(err_im_f),
                 .stats_valid(sv_f), .stats_ifft(si_f), .err_sum_re(esr_f), .err_sum_im(esi_f),
                 .err_energy(ee_f), .ref_energy(re_f));
  fft_top #(.QMODE(Q_UNIFORM)) dut_u (.clk, .rst_n, .in_valid, .in_ready(in_ready_u), .in_re, .in_im,
                 .sel_ifft, .q_enable, .q_bits, .ref_re, .ref_im,
                 .res_pre(pre_u), .res_s(res_u), .err_re(err_re_u), .err_im(err_im_u),
                 .stats_valid(sv_u), .stats_ifft(si_u), .err_sum_re(esr_u), .err_sum_im(esi_u),
                 .err_energy(ee_u), .ref_energy(re_u));

  always #5 clk = ~clk;

  int x_re [], x_im [];
  cvec_t id_re, id_im;
  real rel_f [BMAX+1], rel_u [BMAX+1];

  initial begin
    #(40 * N * (BMAX + 2) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // follow one frame through both processors: reference drive and bit-exact check
  task automatic run_frame(input int b);
    int qb [];
    cvec_t mf_re, mf_im, mu_re, mu_im;
    int m = 0;
    bit got_f = 0, got_u = 0;
    qb = new[L];
    foreach (qb[s]) qb[s] = b;
    foreach (q_bits[s]) q_bits[s] = qbits_t'(b);
    ref_fft_fixed(L, 1'b0, b > 0, qb, 1'b1, x_re, x_im, mf_re, mf_im);
    ref_fft_fixed(L, 1'b0, b > 0, qb, 1'b0, x_re, x_im, mu_re, mu_im);
    fork
      begin
        for (int i = 0; i < N; i++) begin
          in_valid = 1; in_re = IN_W'(x_re[i]); in_im = IN_W'(x_im[i]);
          sel_ifft = 0; q_enable = (b > 0);
          @(posedge clk);
          while (!(in_ready_f && in_ready_u)) @(posedge clk);
          #1;
        end
        in_valid = 0;
      end
      begin
        while (!(got_f && got_u)) begin
          @(negedge clk);
          if (pre_f.valid) begin
            ref_re = data_t'(id_re[m]);
            ref_im = data_t'(id_im[m]);
            checks++;
            if (longint'(pre_f.re) != mf_re[m] || longint'(pre_f.im) != mf_im[m] ||
                longint'(pre_u.re) != mu_re[m] || longint'(pre_u.im) != mu_im[m] || !pre_u.valid) begin
              failures++;
              if (failures < 10) $display("FAIL b %0d m %0d", b, m);
            end
            m++;
          end
          if (sv_f) begin got_f = 1; rel_f[b] = real'(ee_f) / real'(re_f); end
          if (sv_u) begin got_u = 1; rel_u[b] = real'(ee_u) / real'(re_u); end
        end
      end
    join
    checks++;
    if (m != N) begin failures++; $display("FAIL b %0d: %0d results", b, m); end
    $display("b=%2d  error/signal energy  mantissa %e  uniform %e", b, rel_f[b], rel_u[b]);
  endtask

  initial begin
    x_re = new[N];
    x_im = new[N];
    for (int i = 0; i < N; i++) begin
      x_re[i] = int'(24000.0 * $cos(2.0 * PI * 37 * i / N)) + int'($urandom_range(0, 400)) - 200;
      x_im[i] = int'(12000.0 * $sin(2.0 * PI * 101 * i / N)) + int'($urandom_range(0, 400)) - 200;
    end
    ref_dft(L, 1'b0, x_re, x_im, id_re, id_im);
    in_valid = 0; in_re = 0; in_im = 0; sel_ifft = 0; q_enable = 0; ref_re = 0; ref_im = 0;
    foreach (q_bits[s]) q_bits[s] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_frame(0);   // b = 0 here means quantizer off
    for (int b = 1; b <= BMAX; b++) run_frame(b);
    checks += 5;
    if (!(rel_f[10] < rel_f[5] && rel_f[5] < rel_f[1])) begin failures++; $display("FAIL mantissa trend"); end
    if (!(rel_u[10] < rel_u[5] && rel_u[5] < rel_u[1])) begin failures++; $display("FAIL uniform trend"); end
    if (!(rel_f[0] < rel_f[10] && rel_u[0] < rel_u[10])) begin failures++; $display("FAIL quantization free"); end
    if (rel_f[6] > rel_u[6]) begin failures++; $display("FAIL mantissa worse than uniform at b=6"); end
    if (rel_f[0] > 1e-6) begin failures++; $display("FAIL unquantized error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
