// tb_output_stage: an 8-point output stage fed with frames of random
// processor results and references, with invalid samples before, between
// and after frames. Checks the per-sample error, the registered pass-through
// and each frame's error sums, error energy and reference energy (computed
// here with 64-bit arithmetic) and the stats_valid pulse count.
module tb_output_stage;
  import fft_pkg::*;

  localparam int L = 3, N = 8, FRAMES = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  sample_t in_s, out_s;
  data_t ref_re, ref_im, err_re, err_im;
  logic stats_valid, stats_ifft;
  logic signed [ACC_W-1:0] err_sum_re, err_sum_im;
  logic [ACC_W-1:0] err_energy, ref_energy;
  int pulses = 0;

  output_stage #(.LOG2N(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (stats_valid) pulses++;

  initial begin
    in_s = '0; ref_re = 0; ref_im = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      automatic longint sr = 0, si = 0, ee = 0, re = 0;
      automatic bit ifft = f[0];
      repeat (f) begin in_s = '0; in_s.re = 77; @(posedge clk); #1; end   // idle, invalid
      for (int m = 0; m < N; m++) begin
        longint dr, di;
        in_s       = '0;
        in_s.valid = 1;
        in_s.sof   = (m == 0);
        in_s.ifft  = ifft;
        in_s.re    = data_t'(int'($urandom_range(0, 2**26)) - 2**25);
        in_s.im    = data_t'(int'($urandom_range(0, 2**26)) - 2**25);
        ref_re     = in_s.re + data_t'(int'($urandom_range(0, 200)) - 100);
        ref_im     = in_s.im + data_t'(int'($urandom_range(0, 200)) - 100);
        dr = longint'(in_s.re) - longint'(ref_re);
        di = longint'(in_s.im) - longint'(ref_im);
        sr += dr; si += di; ee += dr * dr + di * di;
        re += longint'(ref_re) * longint'(ref_re) + longint'(ref_im) * longint'(ref_im);
        @(posedge clk); #1;
        checks++;
        if (longint'(err_re) != dr || longint'(err_im) != di || out_s.re != in_s.re) failures++;
      end
      in_s = '0;
      checks++;
      if (!stats_valid || stats_ifft != ifft || longint'(err_sum_re) != sr || longint'(err_sum_im) != si ||
          err_energy != ACC_W'(ee) || ref_energy != ACC_W'(re)) begin
        failures++;
        $display("FAIL frame %0d stats v=%0d sum %0d/%0d en %0d/%0d ref %0d/%0d", f, stats_valid, err_sum_re, sr, err_energy, ee, ref_energy, re);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (pulses != FRAMES) begin failures++; $display("FAIL pulses %0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
