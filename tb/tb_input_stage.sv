// tb_input_stage: a 16-point input stage fed with frames of random samples,
// random FFT/IFFT and quantizer switches per frame, and random gaps in
// in_valid. Checks that every frame comes out whole and in order, in
// bit-reversed order, with the 2^LOG2N scaling for FFT frames and none for
// IFFT frames, with the switches of its own frame, sof on sample 0 and no
// gap inside a frame; that in_ready drops (backpressure) at least once; and
// that each frame starts within N+1 clocks of its last input sample.
module tb_input_stage;
  import fft_pkg::*;
  import tb_fft_model_pkg::*;

  localparam int L = 4, N = 16, FRAMES = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, sel_ifft, q_enable;
  logic signed [IN_W-1:0] in_re, in_im;
  sample_t out_s;
  int stalls = 0, cyc = 0;
  int fx_re [FRAMES][N], fx_im [FRAMES][N];
  bit f_ifft [FRAMES], f_qen [FRAMES];
  int f_done_t [FRAMES];

  input_stage #(.LOG2N(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    in_valid = 0; in_re = 0; in_im = 0; sel_ifft = 0; q_enable = 0;
    for (int f = 0; f < FRAMES; f++) begin
      f_ifft[f] = $urandom_range(0, 1);
      f_qen[f]  = $urandom_range(0, 1);
      for (int i = 0; i < N; i++) begin
        fx_re[f][i] = $urandom_range(0, 65535) - 32768;
        fx_im[f][i] = $urandom_range(0, 65535) - 32768;
      end
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < N; i++) begin
        // frames 4..7 have random gaps; the rest are back to back
        while (f >= 4 && f < 8 && $urandom_range(0, 3) == 0) begin
          in_valid = 0; @(posedge clk); #1;
        end
        in_valid = 1;
        in_re    = IN_W'(fx_re[f][i]);
        in_im    = IN_W'(fx_im[f][i]);
        sel_ifft = (i == 0) ? f_ifft[f] : !f_ifft[f];   // only sample 0's value counts
        q_enable = (i == 0) ? f_qen[f]  : !f_qen[f];
        @(posedge clk);
        while (!in_ready) begin stalls++; @(posedge clk); end
        if (i == N - 1) f_done_t[f] = cyc;
        #1;
      end
    in_valid = 0;
  end

  // consumer
  initial begin
    int f = 0, m = 0;
    @(posedge rst_n);
    while (f < FRAMES) begin
      @(negedge clk);
      if (m > 0) begin
        checks++;
        if (!out_s.valid) begin failures++; $display("FAIL gap inside frame %0d", f); end
      end
      if (out_s.valid) begin
        longint er, ei;
        automatic int src = bitrev(m, L);
        er = f_ifft[f] ? longint'(fx_re[f][src]) : longint'(fx_re[f][src]) <<< L;
        ei = f_ifft[f] ? longint'(fx_im[f][src]) : longint'(fx_im[f][src]) <<< L;
        checks++;
        if (longint'(out_s.re) != er || longint'(out_s.im) != ei || out_s.sof != (m == 0) ||
            out_s.ifft != f_ifft[f] || out_s.qen != f_qen[f]) begin
          failures++;
          if (failures < 10) $display("FAIL f %0d m %0d got %0d exp %0d sof %0d", f, m, out_s.re, er, out_s.sof);
        end
        if (m == 0) begin
          checks++;
          if (cyc - f_done_t[f] > N + 1 || cyc - f_done_t[f] < 1) begin
            failures++; $display("FAIL frame %0d start latency %0d", f, cyc - f_done_t[f]);
          end
        end
        m++;
        if (m == N) begin m = 0; f++; end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no backpressure seen"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
