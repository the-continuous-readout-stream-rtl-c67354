// frame_builder: assembles the SN frame record of one FEM: a twelve-word header
// followed by the frame's payload words.
//
// The paper's frame record for each 1.6 ms frame carries a header of twelve
// 16-bit words with the FEM address, the payload word count, a sequential
// identifier, the frame number and a simple checksum of the payload. Because
// count and checksum precede the payload, the payload is first collected in a
// buffer (2^BUF_AW words; this stands in for the FEM's SN-stream DRAM, which the
// paper names but does not describe). The header layout below is this design's:
//   0: 0xF000 | FEM address (5 bits)       1, 2: word count, high and low half
//   3, 4: sequential identifier (frames sent since reset)
//   5, 6: frame number (24 bits, high byte in word 5)
//   7, 8: checksum = 32-bit sum of the payload words
//   9, 10, 11: reserved, zero
// The default buffer size holds the worst case at the paper's settings: with 7
// presamples and 8 postsamples every ROI has at least 16 samples, so a channel
// yields at most 3200 sample words + 200 timestamps + 1 header.
//
// Timing: payload words are accepted one per clock while collecting. At the
// end-of-frame token the block stops accepting, sends the header and then the
// payload, one word per clock under out_ready, with out_last on the final word,
// and then collects the next frame (a single buffer: the input waits while a
// frame is sent, which is also this design's choice).
module frame_builder
  import sn_pkg::*;
#(
  parameter int BUF_AW = 18   // payload buffer: 2^18 words (worst case 217664 at defaults)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        fem_addr,
  input  logic              in_valid,
  output logic              in_ready,
  input  word_t             in,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_last,
  output logic              overflow     // a payload word was lost (buffer full)
);
  typedef enum logic [1:0] {F_COLLECT, F_HEADER, F_PAYLOAD} fstate_e;
  fstate_e state;

  logic [WORD_W-1:0]  buf_mem [2**BUF_AW];
  logic [BUF_AW:0]    wcount;
  logic [BUF_AW:0]    rptr;
  logic [31:0]        csum;
  logic [31:0]        seq_id;
  logic [FRAME_W-1:0] frame_num;
  logic [3:0]         hidx;

  assign in_ready = (state == F_COLLECT);

  logic [31:0] wc32;
  assign wc32 = 32'(wcount);

  logic [WORD_W-1:0] hdr_word;
  always_comb begin
    case (hidx)
      4'd0:    hdr_word = 16'hF000 | 16'(fem_addr);
      4'd1:    hdr_word = wc32[31:16];
      4'd2:    hdr_word = wc32[15:0];
      4'd3:    hdr_word = seq_id[31:16];
      4'd4:    hdr_word = seq_id[15:0];
      4'd5:    hdr_word = 16'(frame_num[FRAME_W-1:16]);
      4'd6:    hdr_word = frame_num[15:0];
      4'd7:    hdr_word = csum[31:16];
      4'd8:    hdr_word = csum[15:0];
      default: hdr_word = '0;
    endcase
  end

  assign out_valid = (state != F_COLLECT);
  assign out_data  = (state == F_HEADER) ? hdr_word : buf_mem[rptr[BUF_AW-1:0]];
  assign out_last  = (state == F_HEADER) ? (hidx == 4'(HDR_WORDS - 1) && wcount == '0)
                                          : (rptr == wcount - 1'b1);

  logic full;
  assign full = wcount[BUF_AW];

  always_ff @(posedge clk) begin
    if (state == F_COLLECT && in_valid && !in.eof && !full)
      buf_mem[wcount[BUF_AW-1:0]] <= in.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= F_COLLECT;
      wcount    <= '0;
      rptr      <= '0;
      csum      <= '0;
      seq_id    <= '0;
      frame_num <= '0;
      hidx      <= '0;
      overflow  <= 1'b0;
    end else begin
      case (state)
        F_COLLECT: if (in_valid) begin
          if (in.eof) begin
            frame_num <= in.frame;
            hidx      <= '0;
            state     <= F_HEADER;
          end else if (!full) begin
            wcount <= wcount + 1'b1;
            csum   <= csum + 32'(in.data);
          end else begin
            overflow <= 1'b1;
          end
        end
        F_HEADER: if (out_ready) begin
          hidx <= hidx + 1'b1;
          if (hidx == 4'(HDR_WORDS - 1)) begin
            rptr  <= '0;
            state <= (wcount == '0) ? F_COLLECT : F_PAYLOAD;
            if (wcount == '0) begin
              seq_id <= seq_id + 1'b1;
              csum   <= '0;
            end
          end
        end
        default: if (out_ready) begin  // F_PAYLOAD
          rptr <= rptr + 1'b1;
          if (rptr == wcount - 1'b1) begin
            state  <= F_COLLECT;
            wcount <= '0;
            csum   <= '0;
            seq_id <= seq_id + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
