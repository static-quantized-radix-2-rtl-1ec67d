// tb_shuffle_unit: a D = 4 shuffling unit driven with a known phase pattern
// and tagged samples. Checks that in phase 1 head is the input of D clocks
// earlier and the output is the butterfly sum, and that in phase 0 the output
// is the butterfly difference of D clocks earlier; also that head is marked
// invalid until the buffer has been filled once.
module tb_shuffle_unit;
  import fft_pkg::*;

  localparam int D = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, phase;
  sample_t in_s, bf_top, bf_bot, head, out_s;
  sample_t hist_in [$], hist_bot [$];

  shuffle_unit #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sample_t tag(int v);
    sample_t s = '0;
    s.valid = 1'b1;
    s.re    = data_t'(v);
    s.im    = data_t'(-v);
    return s;
  endfunction

  initial begin
    in_s = '0; bf_top = '0; bf_bot = '0; phase = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      phase  = (t / D) % 2;
      in_s   = tag(1000 + t);
      bf_top = tag(2000 + t);
      bf_bot = tag(3000 + t);
      #1;
      if (t < D) begin
        checks++; if (head.valid) failures++;
      end else if (phase) begin
        checks++; if (head.re != data_t'(1000 + t - D) || !head.valid) failures++;
        checks++; if (out_s.re != data_t'(2000 + t)) failures++;
      end else if (t >= 2 * D) begin
        checks++; if (out_s.re != data_t'(3000 + t - D) || out_s.im != -data_t'(3000 + t - D)) failures++;
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
