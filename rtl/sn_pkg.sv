// sn_pkg: types, word formats and constants shared by the supernova (SN)
// stream datapath of one LArTPC front-end module (FEM).
//
// The SN stream reads each 1.6 ms frame (3200 samples at 2 MS/s) of the 64
// channels of a FEM back from the ring buffer channel by channel, applies zero
// suppression (ZS) and Huffman coding to the surviving samples and packs them
// into 16-bit words behind a twelve-word frame header.
//
// 16-bit payload word formats. The paper fixes two of them: a Huffman word has
// bit 15 set and 15 code bits below; a raw ADC word carries the 12-bit ADC value
// in bits 11:0 with a 4-bit tag above. The tag values, and the channel-header
// and ROI-timestamp words, are this design's own choice:
//   1ccc_cccc_cccc_cccc  Huffman word, codes packed from bit 14 down
//   0011_aaaa_aaaa_aaaa  raw ADC sample a
//   0001_0000_00cc_cccc  channel header, channel c (0..63) within the FEM
//   0010_tttt_tttt_tttt  ROI timestamp: tick t (0..3199) of the ROI's first sample
package sn_pkg;

  localparam int ADC_W   = 12;   // ADC resolution (paper: 12-bit ADCs)
  localparam int CH_W    = 6;    // channel index within a FEM (64 channels)
  localparam int TICK_W  = 12;   // tick index within a frame (3200 < 4096)
  localparam int FRAME_W = 24;   // frame number carried along the stream
  localparam int WORD_W  = 16;   // readout word width (paper: 16-bit words)
  localparam int HDR_WORDS = 12; // frame header length (paper: twelve 16-bit words)

  localparam logic [3:0] TAG_CHAN = 4'b0001;
  localparam logic [3:0] TAG_TIME = 4'b0010;
  localparam logic [3:0] TAG_ADC  = 4'b0011;

  typedef logic [ADC_W-1:0] adc_t;

  // Threshold sign of a channel. The paper offers positive, negative or either;
  // the encoding and the "off" value (channel never passes) are this design's.
  typedef enum logic [1:0] {
    THR_OFF  = 2'd0,
    THR_POS  = 2'd1,
    THR_NEG  = 2'd2,
    THR_BOTH = 2'd3
  } thr_sign_e;

  // One ADC sample of the channel-ordered SN stream.
  typedef struct packed {
    logic [FRAME_W-1:0] frame;    // frame number
    logic [CH_W-1:0]    ch;       // channel within the FEM
    logic [TICK_W-1:0]  tick;     // sample index within the frame
    adc_t               adc;      // ADC value
    adc_t               baseline; // baseline to apply (dynamic baseline only)
    logic               bl_valid; // baseline established (dynamic baseline only)
    logic               sol;      // first sample of this channel in the frame
    logic               eol;      // last sample of this channel in the frame
    logic               eof;      // last sample of the frame (last channel)
  } sample_t;

  // Output item of the zero suppression: any combination of a channel header,
  // a retained sample and the end of the frame.
  typedef struct packed {
    logic               chan_hdr;  // a new channel starts here
    logic               has_sample;// adc/tick hold a retained sample
    logic               roi_first; // the sample opens a new ROI
    logic               eof;       // the frame ends after this item
    logic [FRAME_W-1:0] frame;
    logic [CH_W-1:0]    ch;
    logic [TICK_W-1:0]  tick;
    adc_t               adc;
  } zs_item_t;

  // Payload word stream into the frame builder; eof marks an end-of-frame
  // token that carries the frame number and no data word.
  typedef struct packed {
    logic               eof;
    logic [FRAME_W-1:0] frame;
    logic [WORD_W-1:0]  data;
  } word_t;

  // Huffman code length for an ADC difference (paper Table 1): 0 -> "1",
  // -1 -> "01", +1 -> "001", -2 -> "0001", +2 -> "00001", -3 -> "000001",
  // +3 -> "0000001". A code of length L is L-1 zeros followed by a one.
  // Returns 0 when the difference cannot be Huffman coded.
  function automatic logic [2:0] huff_len(input logic signed [ADC_W:0] d);
    case (d)
      13'sd0:  return 3'd1;
      -13'sd1: return 3'd2;
      13'sd1:  return 3'd3;
      -13'sd2: return 3'd4;
      13'sd2:  return 3'd5;
      -13'sd3: return 3'd6;
      13'sd3:  return 3'd7;
      default: return 3'd0;
    endcase
  endfunction

endpackage
