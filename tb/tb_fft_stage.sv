// tb_fft_stage: a D = 4 stage (stage 3 of any transform) fed with frames of
// 16 random samples and their flags. Each output is compared with the
// radix-2 step worked out in the testbench: for every block of 8,
// y[j] = a[j] + W a[j+4], y[j+4] = a[j] - W a[j+4], W = W_8^j, conjugated for
// IFFT frames and mantissa-quantized for quantized frames. Also checks the
// latency of D + 1 clocks (sof position) and the valid flag.
module tb_fft_stage;
  import fft_pkg::*;
  import tb_fft_model_pkg::*;

  localparam int D = 4, NF = 16, FRAMES = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  qbits_t q_bits = 5'd3;
  sample_t in_s, out_s;
  sample_t sent [$];
  int sof_in_t, sof_out_t, t = 0;

  fft_stage #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output for output index m of a frame whose inputs are in fr[]
  function automatic void expect_out(input sample_t fr [NF], input int m,
                                     output longint er, output longint ei);
    int blk = m / (2 * D) * 2 * D, j = m % D;
    int wr, wi;
    longint ur, ui, vr, vi, tr, ti;
    wr = ref_quant(int'(tw_cos(j, 2 * D)), 3, 1'b1, fr[0].qen);
    wi = ref_quant(int'(tw_sin(j, 2 * D)), 3, 1'b1, fr[0].qen);
    if (fr[0].ifft) wi = -wi;
    ur = fr[blk + j].re; ui = fr[blk + j].im;
    vr = fr[blk + j + D].re; vi = fr[blk + j + D].im;
    tr = (vr * wr - vi * wi + 8192) >>> 14;
    ti = (vr * wi + vi * wr + 8192) >>> 14;
    if ((m % (2 * D)) < D) begin er = ur + tr; ei = ui + ti; end
    else                   begin er = ur - tr; ei = ui - ti; end
  endfunction

  initial begin
    sample_t frames [FRAMES][NF];
    int outcnt = 0, fo = 0;
    in_s = '0;
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < NF; i++) begin
        frames[f][i]       = '0;
        frames[f][i].valid = 1'b1;
        frames[f][i].sof   = (i == 0);
        frames[f][i].ifft  = f[0];
        frames[f][i].qen   = f[1];
        frames[f][i].re    = data_t'($signed($urandom) >>> 8);
        frames[f][i].im    = data_t'($signed($urandom) >>> 8);
      end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    fork
      begin
        for (int f = 0; f < FRAMES; f++)
          for (int i = 0; i < NF; i++) begin
            in_s = frames[f][i];
            @(posedge clk); #1;
          end
        in_s = '0;   // zeros afterwards: the last frame drains
        repeat (3 * NF) @(posedge clk);
      end
      begin
        int m = 0;
        forever begin
          @(negedge clk);
          if (out_s.valid && out_s.sof) begin
            m = 0;
            checks++;
            if (outcnt == 0 && t != D + 1) begin failures++; $display("FAIL latency %0d", t); end   // latency of the first frame
          end
          if (out_s.valid) begin
            longint er, ei;
            expect_out(frames[fo], m, er, ei);
            checks++;
            if (longint'(out_s.re) != er || longint'(out_s.im) != ei ||
                out_s.ifft != frames[fo][0].ifft || out_s.qen != frames[fo][0].qen) begin
              failures++;
              if (failures < 10) $display("FAIL frame %0d m %0d got %0d exp %0d", fo, m, out_s.re, er);
            end
            outcnt++;
            m++;
            if (m == NF) begin fo++; m = 0; end
            if (fo == FRAMES) break;
          end
        end
      end
    join_any
    checks++;
    if (outcnt != FRAMES * NF) begin
      failures++;
      $display("FAIL got %0d outputs", outcnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) t <= t + 1;
endmodule
