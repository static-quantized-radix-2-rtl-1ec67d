// tb_butterfly: random operands and twiddles, including +1, -j and large
// data values; the expected sum and difference are computed with 64-bit
// integer arithmetic (W*Xo rounded half up at TW_FRAC bits).
module tb_butterfly;
  import fft_pkg::*;

  int checks = 0, failures = 0;
  data_t xe_re, xe_im, xo_re, xo_im, t_re, t_im, b_re, b_im;
  tw_t   w_re, w_im;

  butterfly dut (.*, .top_re(t_re), .top_im(t_im), .bot_re(b_re), .bot_im(b_im));

  function automatic longint rndsh(longint p);
    return (p + 8192) >>> 14;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      longint ar, ai, br, bi, mr, mi;
      int wr, wi;
      ar = longint'($signed($urandom)) <<< ($urandom_range(0, 4));
      ai = longint'($signed($urandom)) <<< ($urandom_range(0, 4));
      br = longint'($signed($urandom)) >>> ($urandom_range(0, 20));
      bi = longint'($signed($urandom)) >>> ($urandom_range(0, 20));
      case (i % 4)
        0: begin wr = 16384; wi = 0; end
        1: begin wr = 0; wi = -16384; end
        default: begin wr = $urandom_range(0, 32768) - 16384; wi = $urandom_range(0, 32768) - 16384; end
      endcase
      xe_re = data_t'(ar); xe_im = data_t'(ai); xo_re = data_t'(br); xo_im = data_t'(bi);
      w_re = tw_t'(wr); w_im = tw_t'(wi);
      #1;
      mr = rndsh(br * wr - bi * wi);
      mi = rndsh(br * wi + bi * wr);
      checks++;
      if (longint'(t_re) != ar + mr || longint'(t_im) != ai + mi ||
          longint'(b_re) != ar - mr || longint'(b_im) != ai - mi) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
