// tb_zero_suppress: runs frames of four channels (threshold signs positive,
// negative, either and off) through the zero suppression with several
// presample/postsample settings, random input gaps and output stalls, frames
// sent both back to back and with idle time between them. The expected item
// sequence comes from a reference written from the definition: a sample is
// kept when any sample of the same channel within [t-post, t+pre] passes the
// threshold. Checks every item (header, sample, ROI start, frame end) and
// counts presamples, postsamples, ROIs and suppressed samples.
module tb_zero_suppress;
  import sn_pkg::*;
  localparam int NCH = 4, FT = 40, NF = 3;
  logic clk = 0, rst_n = 0;
  logic [2:0] cfg_pre = 3'd7;
  logic [3:0] cfg_post = 4'd8;
  adc_t ch_baseline [NCH];
  logic [11:0] ch_thr [NCH];
  thr_sign_e ch_sign [NCH];
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  sample_t in = '0;
  zs_item_t out;
  int checks = 0, failures = 0;

  zero_suppress #(.NCH(NCH), .USE_STREAM_BASELINE(0)) dut (.*);
  always #5 clk = ~clk;

  int data [NF][NCH][FT];
  zs_item_t exp_q [$];
  int n_pre = 0, n_post = 0, n_roi = 0, n_drop = 0, n_items = 0;

  function automatic bit passes(int c, int v);
    int d;
    d = v - int'(ch_baseline[c]);
    case (ch_sign[c])
      THR_POS:  return d > int'(ch_thr[c]);
      THR_NEG:  return d < -int'(ch_thr[c]);
      THR_BOTH: return d > int'(ch_thr[c]) || d < -int'(ch_thr[c]);
      default:  return 0;
    endcase
  endfunction

  task automatic build_expected(int pre, int post);
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NCH; c++) begin
        bit p [FT]; bit k [FT];
        for (int t = 0; t < FT; t++) p[t] = passes(c, data[f][c][t]);
        for (int t = 0; t < FT; t++) begin
          k[t] = 0;
          for (int j = t - post; j <= t + pre; j++) if (j >= 0 && j < FT && p[j]) k[t] = 1;
          if (k[t] && !p[t]) begin
            bit later, earlier;
            later = 0; earlier = 0;
            for (int j = t + 1; j <= t + pre; j++) if (j < FT && p[j]) later = 1;
            for (int j = t - post; j < t; j++) if (j >= 0 && p[j]) earlier = 1;
            if (later && !earlier) n_pre++;
            if (earlier && !later) n_post++;
          end
          if (!k[t]) n_drop++;
        end
        for (int t = 0; t < FT; t++) begin
          bit eof;
          eof = (t == FT - 1 && c == NCH - 1);
          if (k[t] || t == 0 || eof) begin
            zs_item_t e;
            e = '0;
            e.chan_hdr = (t == 0); e.has_sample = k[t];
            e.roi_first = k[t] && (t == 0 || !k[t-1]);
            if (e.roi_first) n_roi++;
            e.eof = eof; e.frame = FRAME_W'(f); e.ch = CH_W'(c); e.tick = TICK_W'(t);
            e.adc = adc_t'(data[f][c][t]);
            exp_q.push_back(e);
          end
        end
      end
  endtask

  initial begin
    repeat (500000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    zs_item_t e;
    checks++; n_items++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected item"); end
    else begin
      e = exp_q.pop_front();
      if (out !== e) begin
        failures++;
        $display("item f%0d c%0d t%0d: got hdr%0b s%0b r%0b e%0b t%0d adc %0d; exp hdr%0b s%0b r%0b e%0b t%0d",
                 e.frame, e.ch, e.tick, out.chan_hdr, out.has_sample, out.roi_first, out.eof, out.tick, out.adc,
                 e.chan_hdr, e.has_sample, e.roi_first, e.eof, e.tick);
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  logic acc;
  always @(posedge clk) acc <= in_valid && in_ready;

  task automatic run(int pre, int post);
    rst_n = 0;
    cfg_pre = 3'(pre); cfg_post = 4'(post);
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NCH; c++) begin
        int pulse_at;
        pulse_at = $urandom_range(0, FT + 20);
        for (int t = 0; t < FT; t++) begin
          int v;
          v = int'(ch_baseline[c]) + int'($urandom_range(0, 8)) - 4;
          if (t == pulse_at || t == pulse_at + 12 || (t >= pulse_at + 20 && t < pulse_at + 23))
            v += (c == 1) ? -40 : (($urandom_range(0, 1) == 1) ? 40 : -40);
          data[f][c][t] = v;
        end
      end
    build_expected(pre, post);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < NCH; c++)
        for (int t = 0; t < FT; t++) begin
          in = '0; in.frame = FRAME_W'(f); in.ch = CH_W'(c); in.tick = TICK_W'(t);
          in.adc = adc_t'(data[f][c][t]);
          in.sol = (t == 0); in.eol = (t == FT-1); in.eof = (t == FT-1 && c == NCH-1);
          in_valid = 1;
          @(posedge clk); #1;
          while (!acc) begin @(posedge clk); #1; end
          in_valid = 0;
          if ($urandom_range(0, 5) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
          else @(negedge clk);
        end
      if (f == 0) repeat (30) @(negedge clk);   // idle: the delay line drains alone
    end
    repeat (60) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("pre %0d post %0d: %0d items missing", pre, post, exp_q.size()); end
    exp_q.delete();
  endtask

  initial begin
    ch_baseline[0] = 2000; ch_baseline[1] = 1500; ch_baseline[2] = 2500; ch_baseline[3] = 800;
    ch_thr[0] = 5; ch_thr[1] = 6; ch_thr[2] = 4; ch_thr[3] = 1;
    ch_sign[0] = THR_POS; ch_sign[1] = THR_NEG; ch_sign[2] = THR_BOTH; ch_sign[3] = THR_OFF;
    run(7, 8);
    run(0, 0);
    run(3, 2);
    run(7, 8);
    checks++;
    if (n_pre == 0 || n_post == 0 || n_roi == 0 || n_drop == 0) begin
      failures++; $display("mechanism missing: pre %0d post %0d roi %0d drop %0d", n_pre, n_post, n_roi, n_drop);
    end
    $display("presamples %0d postsamples %0d ROIs %0d suppressed %0d items %0d", n_pre, n_post, n_roi, n_drop, n_items);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
