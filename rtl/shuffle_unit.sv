// shuffle_unit: delay-feedback shuffling unit between two butterfly stages.
//
// The butterfly of a stage that joins samples D apart needs its two inputs
// at the same time, but the serial stream delivers them D cycles apart, and
// it produces its two outputs at once while the next stage wants them as one
// serial stream. This unit resolves both with a single D-word circular
// buffer and two switches:
//  * phase 0 (first D samples of each 2D block): the demultiplexer writes the
//    incoming sample into the buffer; the multiplexer sends out the word the
//    buffer returns, which is a difference output held from the last block.
//  * phase 1 (last D samples): the buffer returns the sample that arrived D
//    cycles earlier, which is the butterfly's upper (even) input; the
//    multiplexer sends out the butterfly's sum, and the difference is written
//    into the buffer to leave in the next phase 0.
// Interface: one sample per clock, every clock; phase comes from the stage's
// position counter. The buffer is read and written at the same address in
// the same cycle (read-before-write); head is combinational from the buffer.
// Until every word has been written once after reset, head is marked invalid.
// The delay-feedback arrangement is this design's choice of a shuffling unit;
// the processor's description gives the unit's purpose and its demux/mux.
module shuffle_unit
  import fft_pkg::*;
#(
  parameter int unsigned D = 512
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    phase,     // 0: fill, 1: butterfly
  input  sample_t in_s,      // stream from the previous stage
  input  sample_t bf_top,    // butterfly sum
  input  sample_t bf_bot,    // butterfly difference
  output sample_t head,      // word leaving the buffer (butterfly upper input in phase 1)
  output sample_t out_s      // stream to the next stage (combinational)
);

  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1;

  sample_t          buf_q [D];
  logic    [AW-1:0] ptr;
  logic             filled;   // every word of the buffer written since reset

  always_comb begin
    head = buf_q[ptr];
    if (!filled) begin
      head.valid = 1'b0;
      head.sof   = 1'b0;
    end
  end
  assign out_s = phase ? bf_top : head;

  always_ff @(posedge clk) begin
    buf_q[ptr] <= phase ? bf_bot : in_s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      filled <= 1'b0;
    end else if (ptr == AW'(D - 1)) begin
      ptr    <= '0;
      filled <= 1'b1;
    end else begin
      ptr    <= ptr + 1'b1;
    end
  end

endmodule
