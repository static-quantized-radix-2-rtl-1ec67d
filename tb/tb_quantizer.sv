// tb_quantizer: checks both quantizer characteristics against a real-valued
// model, over random and edge-case twiddle components and every resolution
// 0..15, plus the enable switch and the error bounds (uniform: |h| <= q/2;
// mantissa: |h| <= 2^-b |x|, or the clamp at 1.0).
module tb_quantizer;
  import fft_pkg::*;
  import tb_fft_model_pkg::*;

  int checks = 0, failures = 0;
  tw_t    x, yu, yf;
  logic   en;
  qbits_t bits;

  quantizer #(.MODE(Q_UNIFORM)) dut_u (.x(x), .en(en), .bits(bits), .y(yu));
  quantizer #(.MODE(Q_FLOAT))   dut_f (.x(x), .en(en), .bits(bits), .y(yf));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s x=%0d b=%0d en=%0d got=%0d exp=%0d", what, x, bits, en, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int vals [$] = '{0, 1, -1, 2, 3, 16384, -16384, 16383, -16383, 11585, -11585, 8192, 12345, -7, 100};
    for (int i = 0; i < 400; i++) vals.push_back($urandom_range(0, 32768) - 16384);
    foreach (vals[i]) begin
      for (int b = 0; b < 16; b++) begin
        for (int e = 0; e < 2; e++) begin
          x = tw_t'(vals[i]); bits = qbits_t'(b); en = e[0];
          #1;
          check(int'(yu), ref_quant(vals[i], b, 1'b0, en), "uniform");
          check(int'(yf), ref_quant(vals[i], b, 1'b1, en), "float");
          if (en) begin
            real h, q;
            q = p2(int'(TW_FRAC) - b);
            h = real'(vals[i]) - real'(int'(yu));
            checks++;
            if (h > q / 2 || -h > q / 2) failures++;
            h = real'(vals[i]) - real'(int'(yf));
            checks++;
            if ((h < 0 ? -h : h) > p2(-b) * (vals[i] < 0 ? -vals[i] : vals[i]) + 1e-9
                && int'(yf) != 16384 && int'(yf) != -16384) failures++;
          end
        end
      end
    end
    // a few hand-worked values (+1.0 = 16384)
    en = 1;
    x = 16'sd12000; bits = 2; #1;
    check(int'(yu), 12288, "uniform 12000 b2");   // step 4096
    check(int'(yf), 12288, "float 12000 b2");     // e=14, step 4096
    x = 16'sd300; bits = 2; #1;
    check(int'(yu), 0, "uniform 300 b2");
    check(int'(yf), 256, "float 300 b2");         // e=9, step 128: 300 -> 256
    x = -16'sd3000; bits = 3; #1;
    check(int'(yu), -2048, "uniform -3000 b3");   // step 2048: -3000 -> -2048
    check(int'(yf), -3072, "float -3000 b3");     // e=12, step 512: -3000 -> -3072
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
