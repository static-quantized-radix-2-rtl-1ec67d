// fft_stage: one stage of the serial radix-2 decimation-in-time pipeline.
//
// Stage s of an N-point transform joins samples D = 2^(s-1) apart (the input
// stream is in bit-reversed order). The stage holds its own twiddle factor
// generator, a quantizer on each twiddle component, the conjugation used by
// the inverse transform, one butterfly and the shuffling unit:
//   position idx of the sample in its frame (reset by the sof flag),
//   phase = bit log2(D) of idx, k = idx mod D,
//   W = conj?(Q(W_{2D}^k)), Q active when the frame's qen flag is set,
//   conjugated when its ifft flag is set.
// In phase 1 the butterfly takes the sample from D cycles earlier (upper) and
// the current one (lower); its sum leaves at once and its difference D
// cycles later, so the output is again a serial stream in the order the
// next stage expects. Output is registered: latency D + 1 clocks, one sample
// per clock, every clock. The sof flag leaves with output sample 0.
// Interface: sample_t in and out, q_bits static configuration.
// The stage contents (twiddles, shuffling, quantizer, butterfly) follow the
// processor's description; the per-sample flags and the counter are this
// design's.
module fft_stage
  import fft_pkg::*;
#(
  parameter int unsigned D    = 512,      // 2^(stage-1)
  parameter qmode_e      MODE = Q_FLOAT
) (
  input  logic    clk,
  input  logic    rst_n,
  input  qbits_t  q_bits,   // static resolution of this stage's quantizer
  input  sample_t in_s,
  output sample_t out_s
);

  localparam int unsigned LD = $clog2(D);            // log2(D), 0 for D = 1
  localparam int unsigned KW = (D > 1) ? LD : 1;

  logic [LD:0]   cnt_q, idx;
  logic          phase;
  logic [KW-1:0] k;
  tw_t           rom_re, rom_im, q_re, q_im, w_re, w_im;
  sample_t       head, bf_top, bf_bot, sh_out;
  data_t         top_re, top_im, bot_re, bot_im;

  // position in the frame
  always_comb begin
    idx   = in_s.sof ? '0 : cnt_q;
    phase = idx[LD];
    k     = (D > 1) ? KW'(idx) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= idx + 1'b1;
  end

  // twiddle factor generator, quantizer, conjugation
  twiddle_rom #(.D(D)) u_rom (.k(k), .w_re(rom_re), .w_im(rom_im));

  quantizer #(.MODE(MODE)) u_q_re (.x(rom_re), .en(in_s.qen), .bits(q_bits), .y(q_re));
  quantizer #(.MODE(MODE)) u_q_im (.x(rom_im), .en(in_s.qen), .bits(q_bits), .y(q_im));

  always_comb begin
    w_re = q_re;
    w_im = in_s.ifft ? -q_im : q_im;
  end

  // butterfly on (held upper sample, current lower sample)
  always_comb begin
    bf_top       = in_s;
    bf_bot       = in_s;
    bf_top.sof   = head.sof;
    bf_bot.sof   = 1'b0;
    bf_top.valid = in_s.valid & head.valid;
    bf_bot.valid = in_s.valid & head.valid;
    bf_top.re    = top_re;
    bf_top.im    = top_im;
    bf_bot.re    = bot_re;
    bf_bot.im    = bot_im;
  end

  butterfly u_bf (
    .xe_re(head.re), .xe_im(head.im),
    .xo_re(in_s.re), .xo_im(in_s.im),
    .w_re(w_re), .w_im(w_im),
    .top_re(top_re), .top_im(top_im),
    .bot_re(bot_re), .bot_im(bot_im)
  );

  shuffle_unit #(.D(D)) u_shuffle (
    .clk(clk), .rst_n(rst_n), .phase(phase),
    .in_s(in_s), .bf_top(bf_top), .bf_bot(bf_bot),
    .head(head), .out_s(sh_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_s <= '0;
    else        out_s <= sh_out;
  end

endmodule
