// tb_huffman_encoder: two parts. (1) Directed: an ROI whose differences run
// through the whole code table, 0,-1,+1,-2,+2,-3,+3, must give the raw word,
// then Huffman words 0xD221 ("1 01 001 0001 00001", exactly full) and 0x8204
// ("000001 0000001" and two zero fill bits), worked out by hand from the
// table. (2) Random: ROIs of random walks with steps of -5..+5 are encoded and
// the output is decoded by an independent decoder (count the zeros before each
// "1"); the decoded channels, ticks and values must equal the input, and a
// Huffman word followed by another must have had no room for the next code.
// Output stalls are random. Counts raw words, Huffman words and word splits.
module tb_huffman_encoder;
  import sn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  zs_item_t in = '0;
  word_t out;
  int checks = 0, failures = 0;

  huffman_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  word_t got [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out);

  logic acc;
  always @(posedge clk) acc <= in_valid && in_ready;

  task automatic send(zs_item_t it);
    in = it; in_valid = 1;
    @(posedge clk); #1;
    while (!acc) begin @(posedge clk); #1; end
    in_valid = 0;
    @(negedge clk);
  endtask

  function automatic zs_item_t item(bit hdr, bit s, bit first, bit eof, int f, int c, int t, int a);
    zs_item_t e;
    e = '0; e.chan_hdr = hdr; e.has_sample = s; e.roi_first = first; e.eof = eof;
    e.frame = FRAME_W'(f); e.ch = CH_W'(c); e.tick = TICK_W'(t); e.adc = adc_t'(a);
    return e;
  endfunction

  task automatic chk(logic [15:0] g, logic [15:0] e, string what);
    checks++;
    if (g !== e) begin failures++; $display("%s: got %h exp %h", what, g, e); end
  endtask

  // expected decoded samples: {channel, tick, value}
  int exp_c [$], exp_t [$], exp_v [$];
  int n_raw = 0, n_huff = 0, n_split = 0;

  initial begin
    int deltas [7] = '{0, -1, 1, -2, 2, -3, 3};
    int v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Part 1
    v = 1000;
    send(item(1, 1, 1, 0, 5, 3, 10, v));
    for (int i = 0; i < 7; i++) begin v += deltas[i]; send(item(0, 1, 0, i == 6, 5, 3, 11 + i, v)); end
    repeat (10) @(negedge clk);
    checks++;
    if (got.size() != 6) begin failures++; $display("directed: %0d words", got.size()); end
    else begin
      chk(got[0].data, {TAG_CHAN, 6'b0, 6'd3}, "channel header");
      chk(got[1].data, {TAG_TIME, 12'd10}, "timestamp");
      chk(got[2].data, {TAG_ADC, 12'd1000}, "raw");
      chk(got[3].data, 16'hD221, "huffman 1");
      chk(got[4].data, 16'h8204, "huffman 2");
      checks++;
      if (!got[5].eof || got[5].frame != FRAME_W'(5)) begin failures++; $display("eof token"); end
    end
    got.delete();
    // Part 2
    fork
      forever begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); end
    join_none
    for (int f = 0; f < 4; f++) begin
      for (int c = 0; c < 3; c++) begin
        int t;
        bit hdr;
        t = 0; hdr = 1;
        v = $urandom_range(100, 3900);
        for (int r = 0; r < 4; r++) begin
          int len;
          t += $urandom_range(0, 5);
          len = $urandom_range(1, 40);
          for (int i = 0; i < len; i++) begin
            if (i > 0) v += ($urandom_range(0, 4) == 0) ? int'($urandom_range(0, 10)) - 5 : int'($urandom_range(0, 6)) - 3;
            send(item(hdr, 1, i == 0, (c == 2 && r == 3 && i == len - 1), f, c, t, v));
            exp_c.push_back(c); exp_t.push_back(t); exp_v.push_back(v);
            hdr = 0; t++;
          end
          t++;
        end
      end
      send(item(1, 0, 0, 1, f, 7, 0, 0));   // an empty channel that also ends nothing else
    end
    repeat (50) @(negedge clk);
    decode();
    checks++;
    if (n_raw == 0 || n_huff == 0 || n_split == 0) begin
      failures++; $display("mechanism missing: raw %0d huffman %0d split %0d", n_raw, n_huff, n_split);
    end
    $display("raw words %0d huffman words %0d splits %0d", n_raw, n_huff, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic decode();
    int ch, tick, val, k, prev_free;
    bit prev_huff;
    ch = -1; tick = 0; val = 0; k = 0; prev_huff = 0; prev_free = 0;
    foreach (got[i]) begin
      logic [15:0] w;
      w = got[i].data;
      if (got[i].eof) begin prev_huff = 0; continue; end
      if (w[15]) begin
        int pos, zeros, first_len;
        n_huff++;
        pos = 14; zeros = 0; first_len = -1;
        while (pos >= 0) begin
          if (w[pos]) begin
            int d;
            case (zeros) 0: d = 0; 1: d = -1; 2: d = 1; 3: d = -2; 4: d = 2; 5: d = -3; default: d = 3; endcase
            if (first_len < 0) first_len = zeros + 1;
            val += d; tick++;
            checks++;
            if (k >= exp_v.size() || exp_c[k] != ch || exp_t[k] != tick || exp_v[k] != val) begin
              failures++; $display("decoded sample %0d: c%0d t%0d v%0d", k, ch, tick, val);
            end
            k++;
            zeros = 0;
          end else zeros++;
          pos--;
        end
        if (prev_huff) begin
          n_split++;
          checks++;
          if (first_len <= prev_free) begin failures++; $display("word closed with room: free %0d next %0d", prev_free, first_len); end
        end
        prev_huff = 1; prev_free = zeros;
      end else begin
        prev_huff = 0;
        case (w[15:12])
          TAG_CHAN: ch = int'(w[5:0]);
          TAG_TIME: tick = int'(w[11:0]) - 1;
          TAG_ADC: begin
            n_raw++;
            val = int'(w[11:0]); tick++;
            checks++;
            if (k >= exp_v.size() || exp_c[k] != ch || exp_t[k] != tick || exp_v[k] != val) begin
              failures++; $display("decoded raw sample %0d: c%0d t%0d v%0d", k, ch, tick, val);
            end
            k++;
          end
          default: begin failures++; $display("bad word %h", w); end
        endcase
      end
    end
    checks++;
    if (k != exp_v.size()) begin failures++; $display("decoded %0d of %0d samples", k, exp_v.size()); end
  endtask
endmodule
