// tb_dynamic_baseline: drives three frames of two channels (4 blocks of 64
// samples per channel per frame) in the channel-ordered frame layout, with
// random input gaps and output stalls, and compares every output sample and the
// baseline attached to it against a reference model of the algorithm written
// directly from its definition (per-block sums over the channel's own
// timeline). Channel 0 is quiet noise with a level step; channel 1 has a large
// pulse (differences >= 63 hit the 4095 cap) that must block baseline updates.
// Also checks that the 64-sample delay drains at a frame end with no further
// input, and counts updates, rejections and capped samples.
module tb_dynamic_baseline;
  import sn_pkg::*;
  localparam int NCH = 2, FT = 256, NF = 3, BLK = 64;
  localparam int NB = NF * FT / BLK;     // blocks per channel over the run
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  sample_t in = '0, out;
  logic [7:0] mean_tol = 8'd2, var_tol = 8'd3;
  int checks = 0, failures = 0;

  dynamic_baseline #(.NCH(NCH)) dut (.*);
  always #5 clk = ~clk;

  int data [NCH][NF*FT];            // channel timeline
  int ref_base [NCH][NF*FT];
  bit ref_valid [NCH][NF*FT];
  int n_update = 0, n_reject = 0, n_capped = 0;

  function automatic int rmean(int c, int b);
    int s;
    s = 0;
    for (int i = 0; i < BLK; i++) s += data[c][b*BLK+i];
    return s >> 6;
  endfunction
  function automatic int rvar(int c, int b, int m);
    int s;
    s = 0;
    for (int i = 0; i < BLK; i++) begin
      int d;
      d = data[c][b*BLK+i] - m;
      if (d < 0) d = -d;
      s += (d >= 63) ? 4095 : d * d;
    end
    return s >> 6;
  endfunction
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  initial begin
    repeat (300000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // waveforms
    for (int t = 0; t < NF*FT; t++) begin
      data[0][t] = 2000 + int'($urandom_range(0, 2)) + (t >= 400 ? 30 : 0);
      data[1][t] = 1500 + int'($urandom_range(0, 3));
      if (t >= 300 && t < 330) data[1][t] += 200 - 6 * iabs(t - 315);
      if (t >= 330 && t < 340) data[1][t] -= 80;
    end
    // reference
    for (int c = 0; c < NCH; c++) begin
      int m [NB], v [NB];
      int base; bit valid;
      base = 0; valid = 0;
      for (int b = 0; b < NB; b++) begin
        m[b] = rmean(c, b); v[b] = rvar(c, b, m[b]);
        for (int i = 0; i < BLK; i++) if (iabs(data[c][b*BLK+i] - m[b]) >= 63) n_capped++;
      end
      for (int b = 0; b < NB; b++) begin
        for (int i = 0; i < BLK; i++) begin
          ref_base[c][b*BLK+i] = base; ref_valid[c][b*BLK+i] = valid;
        end
        if (b >= 2) begin
          if (iabs(m[b]-m[b-1]) <= 2 && iabs(m[b]-m[b-2]) <= 2 && iabs(m[b-1]-m[b-2]) <= 2 &&
              iabs(v[b]-v[b-1]) <= 3 && iabs(v[b]-v[b-2]) <= 3 && iabs(v[b-1]-v[b-2]) <= 3) begin
            base = m[b-1]; valid = 1; n_update++;
          end else n_reject++;
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < NCH; c++)
        for (int t = 0; t < FT; t++) begin
          in = '0;
          in.frame = FRAME_W'(f); in.ch = CH_W'(c); in.tick = TICK_W'(t);
          in.adc = adc_t'(data[c][f*FT+t]);
          in.sol = (t == 0); in.eol = (t == FT-1); in.eof = (t == FT-1 && c == NCH-1);
          in_valid = 1;
          @(posedge clk); #1;
          while (!in_ready_q) begin @(posedge clk); #1; end
          in_valid = 0;
          if ($urandom_range(0, 4) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
          else @(negedge clk);
        end
      // idle gap between frames: the delay line must drain by itself
      repeat (200) @(negedge clk);
      checks++;
      if (n_out != (f + 1) * NCH * FT) begin failures++; $display("frame %0d not drained: %0d out", f, n_out); end
    end
    checks++;
    if (n_update == 0 || n_reject == 0 || n_capped == 0) begin
      failures++; $display("mechanism not exercised: updates %0d rejects %0d capped %0d", n_update, n_reject, n_capped);
    end
    $display("updates %0d rejects %0d capped samples %0d", n_update, n_reject, n_capped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // in_ready sampled at the rising edge that accepted the input
  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid && in_ready;

  int n_out = 0, oc = 0, ot = 0, of = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int tl;
    tl = of * FT + ot;
    checks++;
    if (out.ch != CH_W'(oc) || out.tick != TICK_W'(ot) || out.frame != FRAME_W'(of) ||
        int'(out.adc) != data[oc][tl] || out.bl_valid != ref_valid[oc][tl] ||
        (ref_valid[oc][tl] && int'(out.baseline) != ref_base[oc][tl])) begin
      failures++;
      $display("f%0d c%0d t%0d: adc %0d/%0d base %0d/%0d valid %0b/%0b", of, oc, ot, out.adc, data[oc][tl],
               out.baseline, ref_base[oc][tl], out.bl_valid, ref_valid[oc][tl]);
    end
    n_out++;
    ot++;
    if (ot == FT) begin ot = 0; oc++; if (oc == NCH) begin oc = 0; of++; end end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 4) != 0);
endmodule
