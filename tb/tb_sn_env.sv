// tb_sn_env: stimulus, reference model and checker for end-to-end runs of
// fem_sn_top. It makes the clock and reset, writes the configuration, plays
// the ADCs (16 MS/s vectors every ADC_DIV clocks; only every 8th vector holds
// the wanted waveform, the others are random, so a wrong downsampling phase
// shows), plays the rest of the crate (token loop, a trigger-stream source, a
// backplane that stalls), and decodes every SN frame record from the dataway.
//
// Waveform: per channel a baseline B(c) = 1800 + (37c mod 1500) with +-2 counts of noise
// and, in most frames, triangular pulses of slope 1, 2, 3 or 25 counts per
// sample (positive, negative or bipolar), so that ROIs use Huffman codes, raw
// words and word splits. With DYN = 1 half of the channels also step up by 20
// counts from frame 2 on, pulses are rarer (so that quiet stretches let the
// baseline settle), and the reference tracks the dynamic baseline.
//
// With PLANE_THR = 1 the channels take the plane-wide thresholds instead of
// the per-channel ones (5 to 8 counts, mixed signs, some channels off).
//
// Reference: for each frame and channel the expected retained samples are
// computed from the definition of the zero suppression (keep a sample if any
// sample of the channel in [t-post, t+pre] of the same frame passes) using the
// static baselines, or with DYN = 1 the baselines from a direct block-by-block
// evaluation of the dynamic-baseline rule on the channel's timeline. Each
// decoded frame must give exactly those samples (channel, tick, value), and its
// header must hold the FEM address, word count, sequence number, frame number
// and checksum, and it must be complete within one frame time after the
// frame's last sample was digitised (the stream keeps pace with the 2 MS/s
// input). Mechanism counters are checked at the end.
module tb_sn_env #(
  parameter int NCH     = 4,
  parameter int FT      = 128,
  parameter int ADC_DIV = 2,
  parameter int NFRAMES = 4,
  parameter int SRAM_AW = 9,
  parameter bit DYN     = 0,
  parameter int NTRG    = 3,  // trigger packets to inject
  parameter bit PLANE_THR = 0 // 1: plane-wide thresholds (U, V, Y by channel range)
) (
  output logic                  clk,
  output logic                  rst_n,
  output logic                  adc_valid,
  output logic [NCH-1:0][11:0]  adc_data,
  output logic                  cfg_we,
  output logic [7:0]            cfg_addr,
  output logic [31:0]           cfg_wdata,
  input  logic [31:0]           cfg_rdata,
  input  logic                  sram_we,
  input  logic [SRAM_AW-1:0]    sram_addr,
  output logic                  trg_valid,
  input  logic                  trg_ready,
  output logic [15:0]           trg_data,
  output logic                  trg_last,
  output logic                  token_in,
  input  logic                  token_out,
  input  logic                  bp_valid,
  output logic                  bp_ready,
  input  logic [15:0]           bp_data,
  input  logic                  bp_last,
  input  logic                  bp_sn,
  input  logic                  sn_buf_overflow,
  output logic                  done,
  output int                    checks,
  output int                    failures
);
  localparam int FEM = 9;
  localparam int PRE = 7, POST = 8;

  initial begin clk = 0; forever #5 clk = ~clk; end

  // ---------------- waveform ----------------
  function automatic int unsigned h(int a, int b);
    int unsigned x;
    x = 32'(a) * 32'd1103515245 + 32'(b) * 32'd2654435761 + 32'd12345;
    x = x ^ (x >> 13);
    x = x * 32'd2246822519;
    return x ^ (x >> 16);
  endfunction
  function automatic int base_of(int c); return 1800 + (37 * c) % 1500; endfunction
  // Plane-wide thresholds: U -25 (negative), V +-15 (either), Y +30 (positive).
  // A FEM reads 16 U, 16 V and 32 Y wires; here channels 0-15 are U, 16-31 V
  // and 32-63 Y (in proportion for other channel counts).
  function automatic int plane_of(int c); return (c < NCH / 4) ? 0 : (c < NCH / 2) ? 1 : 2; endfunction
  function automatic int thr_of(int c);
    if (PLANE_THR) return (plane_of(c) == 0) ? 25 : (plane_of(c) == 1) ? 15 : 30;
    return 5 + c % 4;
  endfunction
  function automatic int sign_of(int c);  // 1 pos, 2 neg, 3 both, 0 off
    if (PLANE_THR) return (plane_of(c) == 0) ? 2 : (plane_of(c) == 1) ? 3 : 1;
    case (c % 5) 0: return 1; 1: return 2; 2, 3: return 3; default: return 0; endcase
  endfunction
  function automatic int tri_pulse(int t, int p, int s);
    int d;
    d = (t > p) ? t - p : p - t;
    return (d < 8) ? s * (8 - d) : 0;
  endfunction
  function automatic int val(int tt, int c);
    int f, t, v, p, s, slopes [4];
    slopes = '{1, 2, 3, 25};
    f = tt / FT; t = tt % FT;
    v = base_of(c) + int'(h(tt, c) % 5) - 2;
    if (DYN && c % 2 == 0 && f >= 2) v += 20;
    if (DYN ? (h(f, c) % 3 == 0) : (h(f, c) % 4 != 0)) begin
      p = int'(h(f, c + 100) % FT);
      s = slopes[h(f, c + 200) % 4];
      case (c % 3)
        0: v += tri_pulse(t, p, s);
        1: v -= tri_pulse(t, p, s);
        default: begin v += tri_pulse(t, p, s); v -= tri_pulse(t, p + 16, s); end
      endcase
      if (h(f, c + 300) % 2 == 0) v += tri_pulse(t, (p + FT / 2) % FT, 3);
    end
    return v;
  endfunction

  // ---------------- dynamic-baseline reference ----------------
  localparam int NT = (NFRAMES + 2) * FT;
  int  rbase [NCH][NT];
  bit  rvalid [NCH][NT];
  int  n_bl_update = 0, n_bl_reject = 0;
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction
  task automatic dyn_reference();
    for (int c = 0; c < NCH; c++) begin
      int m [$], v [$];
      int b, vl;
      bit ok;
      b = 0; ok = 0;
      for (int blk = 0; blk < NT / 64; blk++) begin
        int s, q;
        s = 0; q = 0;
        for (int i = 0; i < 64; i++) s += val(blk * 64 + i, c);
        s = s >> 6;
        for (int i = 0; i < 64; i++) begin
          int d;
          d = iabs(val(blk * 64 + i, c) - s);
          q += (d >= 63) ? 4095 : d * d;
        end
        m.push_back(s); v.push_back(q >> 6);
        for (int i = 0; i < 64; i++) begin rbase[c][blk*64+i] = b; rvalid[c][blk*64+i] = ok; end
        if (blk >= 2) begin
          if (iabs(m[blk]-m[blk-1]) <= 2 && iabs(m[blk]-m[blk-2]) <= 2 && iabs(m[blk-1]-m[blk-2]) <= 2 &&
              iabs(v[blk]-v[blk-1]) <= 3 && iabs(v[blk]-v[blk-2]) <= 3 && iabs(v[blk-1]-v[blk-2]) <= 3) begin
            b = m[blk-1]; ok = 1; n_bl_update++;
          end else n_bl_reject++;
        end
      end
    end
  endtask

  function automatic bit passes(int tt, int c);
    int d, th, bl;
    if (DYN) begin
      if (!rvalid[c][tt]) return 0;
      bl = rbase[c][tt];
    end else bl = base_of(c);
    d = val(tt, c) - bl; th = thr_of(c);
    case (sign_of(c)) 1: return d > th; 2: return d < -th; 3: return d > th || d < -th; default: return 0; endcase
  endfunction

  // Expected samples of frame f, as {channel, tick, value} lists.
  int n_pre = 0, n_post = 0, n_drop = 0, n_kept = 0;
  task automatic expected(int f, ref int ec [$], ref int et [$], ref int ev [$]);
    ec.delete(); et.delete(); ev.delete();
    for (int c = 0; c < NCH; c++) begin
      bit p [];
      p = new[FT];
      for (int t = 0; t < FT; t++) p[t] = passes(f * FT + t, c);
      for (int t = 0; t < FT; t++) begin
        bit k, early, late;
        k = 0; early = 0; late = 0;
        for (int j = t - POST; j < t; j++) if (j >= 0 && p[j]) early = 1;
        for (int j = t + 1; j <= t + PRE; j++) if (j < FT && p[j]) late = 1;
        k = p[t] || early || late;
        if (k) begin ec.push_back(c); et.push_back(t); ev.push_back(val(f * FT + t, c)); n_kept++; end
        else n_drop++;
        if (k && !p[t] && late && !early) n_pre++;
        if (k && !p[t] && early && !late) n_post++;
      end
    end
  endtask

  // ---------------- stimulus ----------------
  int n_adc = 0;
  initial begin
    rst_n = 0; adc_valid = 0; adc_data = '0; cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    done = 0;
    if (DYN) dyn_reference();
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 8'(c);
      cfg_wdata = {6'b0, 2'(sign_of(c)), 12'(thr_of(c)), 12'(base_of(c))};
    end
    @(negedge clk);
    cfg_we = 1; cfg_addr = 8'h80;
    cfg_wdata = {3'b0, 5'(FEM), 8'd3, 8'd2, 4'(POST), 1'b0, 3'(PRE)};
    @(negedge clk);
    cfg_we = 0;
    cfg_addr = 8'h80; #1;
    checks++;
    if (cfg_rdata[28:24] != 5'(FEM)) begin failures++; $display("config readback %h", cfg_rdata); end
    // ADC vectors from the first clock after configuration
    forever begin
      @(negedge clk);
      adc_valid = 0;
      repeat (ADC_DIV - 1) @(negedge clk);
      adc_valid = 1;
      for (int c = 0; c < NCH; c++)
        adc_data[c] = (n_adc % 8 == 0) ? 12'(val(n_adc / 8, c)) : 12'($urandom);
      n_adc++;
    end
  end

  // Token loop: the token comes back a few clocks after it is passed on; the
// first token arrives just after reset.
  int hold = 0;
  initial token_in = 0;
  always @(posedge clk) begin
    if (!rst_n) begin hold <= 3; token_in <= 0; end
    else begin
      token_in <= 0;
      if (token_out) hold <= 3;
      else if (hold == 1) begin hold <= 0; token_in <= 1; end
      else if (hold > 1) hold <= hold - 1;
    end
  end

  // Trigger source: NTRG packets, sent at random times.
  int trg_sent = 0, trg_i = 0, trg_got = 0;
  int trg_len;
  initial begin trg_valid = 0; trg_data = '0; trg_last = 0; end
  always @(negedge clk) if (rst_n) begin
    if (!trg_valid && trg_sent < NTRG && $urandom_range(0, FT * 8 * ADC_DIV * NFRAMES / NTRG / 2) == 0) begin
      trg_valid = 1; trg_i = 0; trg_len = 5 + trg_sent * 3;
    end
    if (trg_valid) begin trg_data = 16'h7000 + 16'(trg_sent * 256 + trg_i); trg_last = (trg_i == trg_len - 1); end
    bp_ready = ($urandom_range(0, 9) != 0);
  end
  always @(posedge clk) if (rst_n && trg_valid && trg_ready) begin
    if (trg_last) begin trg_valid <= 0; trg_sent <= trg_sent + 1; end
    trg_i <= trg_i + 1;
  end

  // ---------------- monitor ----------------
  int n_frames = 0, n_raw = 0, n_huff = 0, n_split = 0, n_roi = 0, n_trg_pk = 0, n_wrap = 0;
  int n_trg_between = 0;
  logic [15:0] rec [$];
  int trg_words = 0;
  bit last_was_sn = 0;
  always @(posedge clk) if (rst_n) begin
    if (sram_we && sram_addr == '1) n_wrap++;
    if (bp_valid && bp_ready) begin
      if (bp_sn) begin
        rec.push_back(bp_data);
        if (bp_last) begin check_frame(); rec.delete(); end
      end else begin
        checks++;
        if (bp_data != 16'h7000 + 16'(n_trg_pk * 256 + trg_words)) begin
          failures++; $display("trigger word %h", bp_data);
        end
        trg_words++;
        if (bp_last) begin
          n_trg_pk++; trg_words = 0;
          if (n_frames > 0 && n_frames < NFRAMES) n_trg_between++;
        end
      end
    end
    if (sn_buf_overflow) begin failures++; $display("SN buffer overflow"); end
  end

  task automatic check_frame();
    int ec [$], et [$], ev [$];
    int sum, ch, tick, value, k;
    bit prev_huff;
    int prev_free;
    checks++;
    if (rec.size() < 12) begin failures++; $display("short record"); return; end
    expected(n_frames, ec, et, ev);
    sum = 0;
    for (int i = 12; i < rec.size(); i++) sum += int'(rec[i]);
    checks++;
    if (rec[0] != 16'hF000 + 16'(FEM) || {rec[1], rec[2]} != 32'(rec.size() - 12) ||
        {rec[3], rec[4]} != 32'(n_frames) || {rec[5], rec[6]} != 32'(n_frames) ||
        {rec[7], rec[8]} != 32'(sum)) begin
      failures++;
      $display("frame %0d header: %h %h%h %h%h %h%h %h%h (payload %0d, sum %h)", n_frames, rec[0], rec[1], rec[2],
               rec[3], rec[4], rec[5], rec[6], rec[7], rec[8], rec.size() - 12, sum);
    end
    // decode the payload
    ch = -1; tick = 0; value = 0; k = 0; prev_huff = 0; prev_free = 0;
    for (int i = 12; i < rec.size(); i++) begin
      logic [15:0] w;
      w = rec[i];
      if (w[15]) begin
        int zeros, first_len;
        zeros = 0; first_len = -1; n_huff++;
        for (int pos = 14; pos >= 0; pos--) begin
          if (w[pos]) begin
            case (zeros) 0: value += 0; 1: value -= 1; 2: value += 1; 3: value -= 2; 4: value += 2; 5: value -= 3; default: value += 3; endcase
            if (first_len < 0) first_len = zeros + 1;
            tick++;
            check_sample(k, ch, tick, value, ec, et, ev);
            k++;
            zeros = 0;
          end else zeros++;
        end
        if (prev_huff) begin
          n_split++;
          checks++;
          if (first_len <= prev_free) begin failures++; $display("Huffman word closed with room left"); end
        end
        prev_huff = 1; prev_free = zeros;
      end else begin
        prev_huff = 0;
        case (w[15:12])
          4'b0001: ch = int'(w[5:0]);
          4'b0010: begin tick = int'(w[11:0]) - 1; n_roi++; end
          4'b0011: begin
            value = int'(w[11:0]); tick++; n_raw++;
            check_sample(k, ch, tick, value, ec, et, ev);
            k++;
          end
          default: begin failures++; $display("frame %0d: bad word %h", n_frames, w); end
        endcase
      end
    end
    checks++;
    if (k != ec.size()) begin failures++; $display("frame %0d: decoded %0d of %0d samples", n_frames, k, ec.size()); end
    // Rate: the record must be out within one frame time (FT * 8 ADC vectors)
    // of the frame's last sample being digitised.
    lag = n_adc - (n_frames + 1) * FT * 8;
    if (lag > max_lag) max_lag = lag;
    checks++;
    if (lag > FT * 8) begin failures++; $display("frame %0d late by %0d ADC vectors", n_frames, lag); end
    n_frames++;
    if (n_frames == NFRAMES) done = 1;
  endtask

  int n_bad_samples = 0;
  int lag, max_lag = 0;
  task automatic check_sample(int k, int ch, int tick, int value, ref int ec [$], ref int et [$], ref int ev [$]);
    checks++;
    if (k >= ec.size() || ec[k] != ch || et[k] != tick || ev[k] != value) begin
      failures++;
      if (n_bad_samples++ < 10)
        $display("frame %0d sample %0d: got c%0d t%0d v%0d exp c%0d t%0d v%0d", n_frames, k, ch, tick, value,
                 (k < ec.size()) ? ec[k] : -1, (k < et.size()) ? et[k] : -1, (k < ev.size()) ? ev[k] : -1);
    end
  endtask

  // Mechanism summary, called by the testbench at the end.
  task automatic summary();
    $display("frames %0d trigger packets %0d (between SN frames %0d) ROIs %0d raw %0d Huffman %0d splits %0d",
             n_frames, n_trg_pk, n_trg_between, n_roi, n_raw, n_huff, n_split);
    $display("kept %0d suppressed %0d presample-only %0d postsample-only %0d ring wraps %0d baseline updates %0d rejects %0d",
             n_kept, n_drop, n_pre, n_post, n_wrap, n_bl_update, n_bl_reject);
    $display("largest delay from end of frame to end of its record: %0d ADC vectors (limit %0d)", max_lag, FT * 8);
    checks++;
    if (n_frames != NFRAMES || n_trg_pk == 0 || n_roi == 0 || n_raw == 0 || n_huff == 0 || n_split == 0 ||
        n_drop == 0 || n_pre == 0 || n_post == 0 || (NFRAMES * FT > 3 * (1 << SRAM_AW) / NCH && n_wrap == 0) ||
        (DYN && (n_bl_update == 0 || n_bl_reject == 0))) begin
      failures++; $display("a mechanism was not exercised");
    end
  endtask

  initial begin checks = 0; failures = 0; end
endmodule
