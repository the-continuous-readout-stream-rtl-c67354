// zero_suppress: per-channel zero suppression (ZS) of the SN stream with
// presamples and postsamples, forming regions of interest (ROIs).
//
// Following the paper, a sample passes when, after subtracting the channel's
// baseline, it exceeds the channel's threshold in the configured direction:
// positive (adc > baseline + thr), negative (adc < baseline - thr) or either.
// A sample is kept when it passes, when one of the next `pre` samples passes
// (presamples) or when one of the previous `post` samples passed (postsamples);
// a maximal run of kept samples is an ROI. Up to 7 presamples and 8
// postsamples are supported, the limits the paper gives for its firmware. The
// baseline is the static per-channel value from zs_config, or, with
// USE_STREAM_BASELINE = 1, the value attached to each sample by
// dynamic_baseline; a channel without a valid dynamic baseline keeps nothing.
//
// How it is built: samples pass through a 7-entry delay line; the sample `pre`
// entries back is the candidate. Its lookahead (the newer entries of the same
// channel) decides presamples; a counter reloaded with `post` on every pass
// decides postsamples. Each entry carries a one-bit segment tag that toggles at
// every channel start, so the delay line runs on across channel boundaries
// without one channel's pulses keeping samples of its neighbour. At the end of
// a frame, when no further input waits, the line drains by itself.
//
// Output: one zs_item_t per candidate that is kept, starts a channel or ends a
// frame. A channel header is produced for every channel, even one with no
// kept samples (this design's choice); roi_first marks the first sample of an
// ROI. Valid/ready streams; one sample per clock; latency `pre` samples. The
// ROIs end at frame boundaries (this design's choice: frames are processed
// independently).
module zero_suppress
  import sn_pkg::*;
#(
  parameter int NCH                 = 64, // channels per FEM (paper: 64)
  parameter bit USE_STREAM_BASELINE = 0   // 0: static baseline (paper's default mode)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [2:0]        cfg_pre,
  input  logic [3:0]        cfg_post,
  input  adc_t              ch_baseline [NCH],
  input  logic [ADC_W-1:0]  ch_thr      [NCH],
  input  thr_sign_e         ch_sign     [NCH],
  input  logic              in_valid,
  output logic              in_ready,
  input  sample_t           in,
  output logic              out_valid,
  input  logic              out_ready,
  output zs_item_t          out
);
  localparam int PRE_MAX = 7;
  localparam int CHB     = $clog2(NCH);

  typedef struct packed {
    logic    valid;
    logic    seg;
    logic    pass;
    sample_t s;
  } ent_t;

  ent_t       dl [PRE_MAX];   // dl[0] newest
  logic       last_seg;
  logic       tail_eof;       // newest accepted sample closed a frame
  logic [3:0] post_cnt;
  logic       prev_kept;

  // Threshold test of the entering sample.
  adc_t               bl;
  logic               bl_ok;
  logic signed [13:0] d, thr_s;
  logic               pass_in;
  logic [CHB-1:0]     ich;
  assign ich   = in.ch[CHB-1:0];
  assign bl    = USE_STREAM_BASELINE ? in.baseline : ch_baseline[ich];
  assign bl_ok = USE_STREAM_BASELINE ? in.bl_valid : 1'b1;
  assign d     = $signed({2'b0, in.adc}) - $signed({2'b0, bl});
  assign thr_s = $signed({2'b0, ch_thr[ich]});
  always_comb begin
    unique case (ch_sign[ich])
      THR_POS:  pass_in = d > thr_s;
      THR_NEG:  pass_in = d < -thr_s;
      THR_BOTH: pass_in = (d > thr_s) || (d < -thr_s);
      default:  pass_in = 1'b0;
    endcase
    pass_in = pass_in && bl_ok;
  end

  // Flush steps shift a bubble in when the frame is complete and no input waits.
  logic any_held;
  always_comb begin
    any_held = 1'b0;
    for (int i = 0; i < PRE_MAX; i++)
      if (32'(i) < 32'(cfg_pre) && dl[i].valid) any_held = 1'b1;
  end

  logic flush;
  ent_t e0;
  assign flush = !in_valid && tail_eof && any_held;
  always_comb begin
    e0       = '0;
    e0.valid = in_valid;
    e0.seg   = in.sol ? ~last_seg : last_seg;
    e0.pass  = pass_in;
    e0.s     = in;
  end

  // Candidate and keep decision.
  ent_t       cand;
  logic       look, keep, post_on;
  logic [3:0] post_eff;
  always_comb begin
    cand = (cfg_pre == 3'd0) ? e0 : dl[cfg_pre - 3'd1];
    look = cand.pass;
    for (int i = 0; i < PRE_MAX; i++)
      if (32'(i) + 1 < 32'(cfg_pre) && dl[i].valid && dl[i].seg == cand.seg && dl[i].pass)
        look = 1'b1;
    if (cfg_pre != 3'd0 && e0.valid && e0.seg == cand.seg && e0.pass) look = 1'b1;
    post_eff = cand.s.sol ? 4'd0 : post_cnt;
    post_on  = (post_eff != 4'd0);
    keep     = cand.valid && (look || post_on);
  end

  logic emit, step;
  assign emit      = cand.valid && (keep || cand.s.sol || cand.s.eof);
  assign step      = (in_valid || flush) && (!emit || out_ready);
  assign in_ready  = !emit || out_ready;
  assign out_valid = (in_valid || flush) && emit;

  always_comb begin
    out            = '0;
    out.chan_hdr   = cand.s.sol;
    out.has_sample = keep;
    out.roi_first  = keep && (cand.s.sol || !prev_kept);
    out.eof        = cand.s.eof;
    out.frame      = cand.s.frame;
    out.ch         = cand.s.ch;
    out.tick       = cand.s.tick;
    out.adc        = cand.s.adc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PRE_MAX; i++) dl[i] <= '0;
      last_seg  <= 1'b0;
      tail_eof  <= 1'b0;
      post_cnt  <= '0;
      prev_kept <= 1'b0;
    end else if (step) begin
      dl[0] <= in_valid ? e0 : '0;
      for (int i = 1; i < PRE_MAX; i++) dl[i] <= dl[i-1];
      if (in_valid) begin
        last_seg <= e0.seg;
        tail_eof <= in.eof;
      end
      if (cand.valid) begin
        post_cnt  <= cand.pass ? cfg_post : (post_on ? post_eff - 4'd1 : 4'd0);
        prev_kept <= keep;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready && in_valid |=> out_valid && $stable(out));

endmodule
