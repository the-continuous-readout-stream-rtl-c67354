// dynamic_baseline: sliding-window baseline estimator of the SN stream, the
// alternative to static per-channel baselines (selected in fem_sn_top by the
// DYNAMIC_BASELINE parameter).
//
// Algorithm (as in the paper): the waveform of each channel is cut into
// contiguous 64-sample blocks. For each block a rounded mean (sum of the 64
// ADC values with the 6 LSBs dropped) and a truncated variance (sum of the
// squared differences to that mean with the 6 LSBs dropped; a sample whose
// absolute difference is >= 63 contributes 4095) are formed. When the
// pairwise differences of the means and of the variances of the last three
// blocks are all within the configured tolerances, the mean of the middle
// block becomes the channel's baseline, applied from the first sample after
// the third block. The window slides by one block at a time. Until the test
// first succeeds the channel has no valid baseline (bl_valid = 0) and the ZS
// keeps none of its samples.
//
// How it is built: the variance needs the block mean before the samples are
// summed, so every sample passes through a 64-entry delay line. The entering
// side sums the block and yields its mean when the 64th sample enters; the
// leaving side accumulates the variance as the block leaves and, with its last
// sample, runs the three-block comparison. A sample leaves with the baseline in
// force at that moment, which is therefore exactly the one the paper applies to
// it. The stream arrives channel by channel, one frame at a time; since a frame
// holds a multiple of 64 samples per channel (3200 = 50 x 64) blocks never
// straddle channels, and the per-channel state (baseline, valid flag, means and
// variances of the two previous blocks) lives in NCH-entry arrays indexed by the
// leaving sample's channel. The delay line runs continuously across channel
// boundaries; only at the end of a frame, when no further input is waiting, it
// is drained on its own.
//
// This design's choices: the comparison is "<=" tolerance; when the test fails
// the previous baseline stays in force; state resets to "no baseline".
//
// Interface: valid/ready sample streams in and out, one sample per clock in the
// steady state, latency 64 samples. mean_tol and var_tol come from zs_config.
module dynamic_baseline
  import sn_pkg::*;
#(
  parameter int NCH = 64   // channels per FEM (paper: 64)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  mean_tol,
  input  logic [7:0]  var_tol,
  input  logic        in_valid,
  output logic        in_ready,
  input  sample_t     in,
  output logic        out_valid,
  input  logic        out_ready,
  output sample_t     out
);
  localparam int BLK = 64;   // block length (paper: 64 samples, 32 us)
  localparam int CHB = $clog2(NCH);

  // Delay line.
  sample_t       dl [BLK];
  logic [5:0]    wp, rp;
  logic [6:0]    cnt;        // entries held
  logic [6:0]    flush_cnt;  // entries that belong to frames already complete

  // Entering side.
  logic [17:0]   sum_in;
  logic [5:0]    n_in;
  adc_t          mean_next;

  // Leaving side.
  logic [5:0]    n_out;
  adc_t          mean_drain;
  logic [17:0]   var_sum;

  // Per-channel state.
  adc_t          c_base [NCH];
  logic          c_valid[NCH];
  adc_t          c_m1 [NCH], c_m2 [NCH];   // means of the previous two blocks
  adc_t          c_v1 [NCH], c_v2 [NCH];   // variances of the previous two blocks
  logic [1:0]    c_nb [NCH];               // previous blocks available (0..2)

  logic in_fire, out_fire;
  sample_t head;
  logic [CHB-1:0] hch;

  assign head      = dl[rp];
  assign hch       = head.ch[CHB-1:0];
  assign out_valid = (cnt == 7'(BLK)) || (flush_cnt != '0);
  assign out_fire  = out_valid && out_ready;
  assign in_ready  = (cnt < 7'(BLK)) || out_fire;
  assign in_fire   = in_valid && in_ready;

  always_comb begin
    out          = head;
    out.baseline = c_base[hch];
    out.bl_valid = c_valid[hch];
  end

  // Variance contribution of the leaving sample.
  adc_t                 mean_use;
  logic signed [12:0]   diff;
  logic [12:0]          adiff;
  logic [11:0]          contrib;
  assign mean_use = (n_out == '0) ? mean_next : mean_drain;
  assign diff     = $signed({1'b0, head.adc}) - $signed({1'b0, mean_use});
  assign adiff    = diff[12] ? 13'(-diff) : 13'(diff);
  always_comb begin
    if (adiff >= 13'd63) contrib = 12'd4095;
    else                 contrib = 12'(adiff * adiff);
  end

  // Block statistics of the leaving block, complete with its last sample.
  logic [17:0] var_total;
  adc_t        m0, v0;
  assign var_total = ((n_out == '0) ? 18'd0 : var_sum) + 18'(contrib);
  assign m0        = mean_use;
  assign v0        = var_total[17:6];

  function automatic logic close_to(input adc_t a, input adc_t b, input logic [7:0] tol);
    return ((a > b) ? (a - b) : (b - a)) <= ADC_W'(tol);
  endfunction

  logic agree;
  assign agree = close_to(m0, c_m1[hch], mean_tol) && close_to(m0, c_m2[hch], mean_tol) &&
                 close_to(c_m1[hch], c_m2[hch], mean_tol) &&
                 close_to(v0, c_v1[hch], var_tol) && close_to(v0, c_v2[hch], var_tol) &&
                 close_to(c_v1[hch], c_v2[hch], var_tol);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; flush_cnt <= '0;
      sum_in <= '0; n_in <= '0; mean_next <= '0;
      n_out <= '0; mean_drain <= '0; var_sum <= '0;
      for (int i = 0; i < BLK; i++) dl[i] <= '0;
      for (int c = 0; c < NCH; c++) begin
        c_base[c] <= '0; c_valid[c] <= 1'b0; c_nb[c] <= '0;
        c_m1[c] <= '0; c_m2[c] <= '0; c_v1[c] <= '0; c_v2[c] <= '0;
      end
    end else begin
      // Leaving side.
      if (out_fire) begin
        rp <= rp + 1'b1;
        if (n_out == '0) mean_drain <= mean_next;
        var_sum <= var_total;
        n_out   <= n_out + 1'b1;
        if (n_out == 6'(BLK - 1)) begin
          // Last sample of a block: three-block comparison, slide the window.
          if (c_nb[hch] == 2'd2 && agree) begin
            c_base[hch]  <= c_m1[hch];
            c_valid[hch] <= 1'b1;
          end
          c_m2[hch] <= c_m1[hch];
          c_v2[hch] <= c_v1[hch];
          c_m1[hch] <= m0;
          c_v1[hch] <= v0;
          if (c_nb[hch] != 2'd2) c_nb[hch] <= c_nb[hch] + 1'b1;
        end
      end
      // Entering side.
      if (in_fire) begin
        dl[wp] <= in;
        wp     <= wp + 1'b1;
        n_in   <= n_in + 1'b1;
        if (n_in == 6'(BLK - 1)) begin
          mean_next <= ADC_W'((sum_in + 18'(in.adc)) >> 6);
          sum_in    <= '0;
        end else begin
          sum_in <= sum_in + 18'(in.adc);
        end
      end
      cnt <= cnt + 7'(in_fire) - 7'(out_fire);
      if (in_fire && in.eof)
        flush_cnt <= cnt + 7'(in_fire) - 7'(out_fire);
      else if (out_fire && flush_cnt != '0)
        flush_cnt <= flush_cnt - 1'b1;
    end
  end

  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out.adc) && $stable(out.tick));

endmodule
