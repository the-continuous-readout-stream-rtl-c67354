// huffman_encoder: fixed-table Huffman coding of the zero-suppressed ROIs into
// 16-bit readout words.
//
// Following the paper: within an ROI, a sample that differs from the previous
// sample by at most +-3 ADC counts is coded with the table 0 -> "1", -1 -> "01",
// +1 -> "001", -2 -> "0001", +2 -> "00001", -3 -> "000001", +3 -> "0000001"
// (each code ends with the "1" that separates it from the next). Codes are
// packed from bit 14 downwards into a word with bit 15 set. A code that does
// not fit in the bits left closes the word (unused low bits are zero) and
// starts a new one; a difference outside +-3 closes the word and the sample is
// sent as a raw 12-bit ADC word. This design's own choices: the first sample of
// every ROI is sent raw, preceded by an ROI timestamp word holding its tick;
// a channel header word precedes the channel's data; a word is closed only when
// the next code does not fit or the run of codes ends (also when exactly full).
// Word formats are listed in sn_pkg.
//
// Timing: one input item per clock while the output queue has room; an item
// makes 0 to 4 words (e.g. close word + channel header + timestamp + raw).
// Words leave one per clock through a 6-entry queue; input is accepted while
// at most 2 words are queued. At a frame end the open word is closed and an
// end-of-frame token (word_t.eof) carrying the frame number is queued.
module huffman_encoder
  import sn_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  zs_item_t in,
  output logic     out_valid,
  input  logic     out_ready,
  output word_t    out
);
  localparam int QD = 6;

  word_t      q [QD];
  logic [2:0] q_cnt;
  logic       hw_open;
  logic [14:0] hw_bits;
  logic [3:0] hw_pos;     // code bits used in the open word
  adc_t       prev;

  assign in_ready  = (q_cnt <= 3'd2);
  assign out_valid = (q_cnt != '0);
  assign out       = q[0];

  // Words produced by the current input item.
  word_t       nw [4];
  logic [2:0]  n_new;
  logic        n_open;
  logic [14:0] n_bits;
  logic [3:0]  n_pos;
  adc_t        n_prev;

  always_comb begin
    logic signed [ADC_W:0] delta;
    logic [2:0]            len;
    for (int i = 0; i < 4; i++) nw[i] = '0;
    n_new  = '0;
    n_open = hw_open;
    n_bits = hw_bits;
    n_pos  = hw_pos;
    n_prev = prev;
    delta  = $signed({1'b0, in.adc}) - $signed({1'b0, prev});
    len    = huff_len(delta);

    if (in.chan_hdr) begin
      if (n_open) begin
        nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {1'b1, n_bits}};
        n_new = n_new + 1'b1;
        n_open = 1'b0;
      end
      nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {TAG_CHAN, 6'b0, in.ch}};
      n_new = n_new + 1'b1;
    end

    if (in.has_sample) begin
      if (in.roi_first || len == 3'd0) begin
        if (n_open) begin
          nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {1'b1, n_bits}};
          n_new = n_new + 1'b1;
          n_open = 1'b0;
        end
        if (in.roi_first) begin
          nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {TAG_TIME, in.tick}};
          n_new = n_new + 1'b1;
        end
        nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {TAG_ADC, in.adc}};
        n_new = n_new + 1'b1;
      end else begin
        if (n_open && (5'(n_pos) + 5'(len) > 5'd15)) begin
          nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {1'b1, n_bits}};
          n_new = n_new + 1'b1;
          n_open = 1'b0;
        end
        if (!n_open) begin
          n_open = 1'b1;
          n_bits = '0;
          n_pos  = '0;
        end
        // The code's closing "1" lands at bit 15 - pos - len.
        n_bits = n_bits | (15'd1 << (4'd15 - n_pos - 4'(len)));
        n_pos  = n_pos + 4'(len);
      end
      n_prev = in.adc;
    end

    if (in.eof) begin
      if (n_open) begin
        nw[2'(n_new)] = '{eof: 1'b0, frame: in.frame, data: {1'b1, n_bits}};
        n_new = n_new + 1'b1;
        n_open = 1'b0;
      end
      nw[2'(n_new)] = '{eof: 1'b1, frame: in.frame, data: '0};
      n_new = n_new + 1'b1;
    end
  end

  logic in_fire, out_fire;
  assign in_fire  = in_valid && in_ready;
  assign out_fire = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < QD; i++) q[i] <= '0;
      q_cnt   <= '0;
      hw_open <= 1'b0;
      hw_bits <= '0;
      hw_pos  <= '0;
      prev    <= '0;
    end else begin
      logic [2:0] base;
      base = q_cnt;
      if (out_fire) begin
        for (int i = 0; i < QD - 1; i++) q[i] <= q[i+1];
        base = q_cnt - 1'b1;
      end
      if (in_fire) begin
        for (int i = 0; i < 4; i++)
          if (3'(i) < n_new) q[base + 3'(i)] <= nw[i];
        hw_open <= n_open;
        hw_bits <= n_bits;
        hw_pos  <= n_pos;
        prev    <= n_prev;
      end
      q_cnt <= base + (in_fire ? n_new : 3'd0);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= 3'(QD));

endmodule
