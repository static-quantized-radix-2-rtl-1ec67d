// tb_twiddle_rom: reads every entry of a 4-entry and a 512-entry twiddle ROM
// and compares it with cos/sin evaluated in the testbench, to within half an
// LSB, and checks a few exact values (W^0 = 1, W_{1024}^256 = -j).
module tb_twiddle_rom;
  import fft_pkg::*;

  int checks = 0, failures = 0;
  logic [1:0] k4;
  logic [8:0] k512;
  tw_t r4, i4, r512, i512;

  twiddle_rom #(.D(4))   dut4   (.k(k4),   .w_re(r4),   .w_im(i4));
  twiddle_rom #(.D(512)) dut512 (.k(k512), .w_re(r512), .w_im(i512));

  task automatic near(tw_t got, real exp, string what);
    real d = real'(got) - exp * 16384.0;
    checks++;
    if (d > 0.5 || d < -0.5) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%f", what, got, exp * 16384.0);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 4; k++) begin
      k4 = 2'(k); #1;
      near(r4, $cos(2.0 * 3.141592653589793 * k / 8.0), "cos8");
      near(i4, -$sin(2.0 * 3.141592653589793 * k / 8.0), "sin8");
    end
    for (int k = 0; k < 512; k++) begin
      k512 = 9'(k); #1;
      near(r512, $cos(2.0 * 3.141592653589793 * k / 1024.0), "cos1024");
      near(i512, -$sin(2.0 * 3.141592653589793 * k / 1024.0), "sin1024");
    end
    k512 = 0; #1;
    checks++; if (r512 != 16384 || i512 != 0) failures++;
    k512 = 256; #1;
    checks++; if (r512 != 0 || i512 != -16384) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
