// input_stage: signal input logic of the processor.
//
// It turns a stream of complex input samples in natural order into the
// serial, bit-reversed N-point sequence that a decimation-in-time pipeline
// consumes, and attaches the control lines to each frame:
//  * Switches: the FFT/IFFT select and the quantizer enable are sampled with
//    the first sample of each input frame and travel with that frame, so the
//    mode may change from one frame to the next.
//  * Input scaling: an FFT sample is shifted left by LOG2N bits into the
//    internal format; an IFFT sample is not, which scales it by 1/N exactly.
//  * Reordering: a ping-pong memory of two N-word banks. One bank is written
//    in natural order while the other is read at bit-reversed addresses.
//    Reading runs in fixed slots of N clocks; a slot reads a bank only if the
//    bank was complete when the slot began, otherwise it sends N invalid
//    samples, so the pipeline behind it never stops and always drains.
// Interface: valid/ready input handshake (a sample is taken when in_valid and
// in_ready are both high; in_ready drops while both banks wait to be read).
// Output: one sample_t per clock, registered; sof marks sample 0 of a frame.
// Latency from the last sample of a frame to its first output: 2 to N+1
// clocks. Bit-reversed input order and the 1/N IFFT input scaling follow the
// processor's description; the memory organisation, the handshake and the
// slot timing are this design's.
module input_stage
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = MAX_LOG2N
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  input  logic                   sel_ifft,   // FFT/IFFT enable switch: 1 selects IFFT
  input  logic                   q_enable,   // quantizer enable switch
  output sample_t                out_s
);

  localparam int unsigned N = 2 ** LOG2N;

  typedef logic signed [IN_W-1:0] in_t;

  function automatic logic [LOG2N-1:0] bitrev(input logic [LOG2N-1:0] a);
    for (int i = 0; i < LOG2N; i++) bitrev[i] = a[LOG2N-1-i];
  endfunction

  in_t              mem_re [2*N];
  in_t              mem_im [2*N];
  logic [1:0]       full_q;
  logic [1:0]       bank_ifft, bank_qen;
  logic             wb, rb;
  logic [LOG2N-1:0] wcnt, rcnt;
  logic             active_q, active;
  logic             wr, rd_last;

  assign in_ready = !full_q[wb];
  assign wr       = in_valid && in_ready;
  assign active   = (rcnt == '0) ? full_q[rb] : active_q;
  assign rd_last  = active && (rcnt == LOG2N'(N - 1));

  // write side
  always_ff @(posedge clk) begin
    if (wr) begin
      mem_re[{wb, wcnt}] <= in_re;
      mem_im[{wb, wcnt}] <= in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb        <= 1'b0;
      wcnt      <= '0;
      bank_ifft <= '0;
      bank_qen  <= '0;
    end else if (wr) begin
      if (wcnt == '0) begin
        bank_ifft[wb] <= sel_ifft;
        bank_qen[wb]  <= q_enable;
      end
      wcnt <= wcnt + 1'b1;
      if (wcnt == LOG2N'(N - 1)) wb <= !wb;
    end
  end

  // bank status: set by the writer on its last sample, cleared by the reader
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= '0;
    end else begin
      for (int b = 0; b < 2; b++) begin
        if (wr && wcnt == LOG2N'(N - 1) && wb == 1'(b)) full_q[b] <= 1'b1;
        else if (rd_last && rb == 1'(b))                 full_q[b] <= 1'b0;
      end
    end
  end

  // read side: free-running slots of N clocks
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rcnt     <= '0;
      rb       <= 1'b0;
      active_q <= 1'b0;
    end else begin
      rcnt     <= rcnt + 1'b1;
      active_q <= active && !rd_last;
      if (rd_last) rb <= !rb;
    end
  end

  in_t rd_re, rd_im;
  always_ff @(posedge clk) begin
    rd_re <= mem_re[{rb, bitrev(rcnt)}];
    rd_im <= mem_im[{rb, bitrev(rcnt)}];
  end

  logic rd_valid, rd_sof, rd_ifft, rd_qen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_sof   <= 1'b0;
      rd_ifft  <= 1'b0;
      rd_qen   <= 1'b0;
    end else begin
      rd_valid <= active;
      rd_sof   <= active && rcnt == '0;
      rd_ifft  <= bank_ifft[rb];
      rd_qen   <= bank_qen[rb];
    end
  end

  // input scaling into the internal format
  always_comb begin
    out_s.valid = rd_valid;
    out_s.sof   = rd_sof;
    out_s.ifft  = rd_ifft;
    out_s.qen   = rd_qen;
    if (rd_ifft) begin
      out_s.re = data_t'(rd_re);
      out_s.im = data_t'(rd_im);
    end else begin
      out_s.re = data_t'(rd_re) <<< LOG2N;
      out_s.im = data_t'(rd_im) <<< LOG2N;
    end
  end

endmodule
