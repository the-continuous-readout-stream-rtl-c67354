// ringbuf_sn_reader: reads each completed frame back from the SRAM ring buffer
// channel by channel and presents it as the SN sample stream.
//
// Following the paper, the data written in time order are read back "ordered by
// channel" and the SN stream is read continuously, one 1.6 ms frame (FRAME_TICKS
// samples per channel) after another. Frame f covers ticks f*FRAME_TICKS ..
// (f+1)*FRAME_TICKS-1 of every channel. Its start tick falls at slot fs (0..2)
// of triple fq (see ringbuf_writer for the packing). Once the writer reports
// that the last triple of frame f is in the SRAM, the reader fetches, for
// channel 0, 1, .. NCH-1 in turn, the NQ words that hold the frame's samples;
// an unpacker then emits them one sample per clock with the channel, tick and
// frame number attached and sol/eol/eof marking channel and frame ends. A word
// that straddles two frames is read once for each.
//
// Timing and handshakes: reads are issued only while the writer leaves the SRAM
// port free (port_busy low) and only as long as the word FIFO has room for the
// reads in flight; read data return RD_LAT clocks after rd_en. The FIFO
// depth (32 words = 96 samples) lets the unpacker run on, one sample per
// clock, through the writer's bursts of NCH = 64 clocks. The output is a
// valid/ready stream. The next frame's reads start once the unpacker has sent
// the current frame's last sample. The frame counter starts at 0 at reset and
// is this design's own choice of frame numbering. The separate trigger-stream
// readout of the same SRAM is not part of this block.
// The baseline fields of the output sample (baseline, bl_valid) are left zero
// here; the dynamic-baseline stage fills them when it is present.
module ringbuf_sn_reader
  import sn_pkg::*;
#(
  parameter int NCH         = 64,   // channels per FEM (power of two)
  parameter int ADDR_W      = 20,   // SRAM address width (paper: 1 M words)
  parameter int FRAME_TICKS = 3200, // samples per channel per frame (1.6 ms at 2 MS/s)
  parameter int RD_LAT      = 2,    // SRAM read latency in clocks
  parameter int FIFO_DEPTH  = 32    // read-word FIFO depth (covers a 64-clock write burst)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       wr_triples,
  input  logic              port_busy,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [35:0]       rd_data,
  output logic              out_valid,
  input  logic              out_ready,
  output sample_t           out
);
  localparam int CHB = $clog2(NCH);
  localparam int QB  = ADDR_W - CHB;
  localparam int FB  = $clog2(FIFO_DEPTH);
  localparam int QW  = 16;  // width of the word index within a channel

  typedef enum logic [1:0] {R_IDLE, R_ISSUE, R_WAIT} rstate_e;
  rstate_e state;

  logic [FRAME_W-1:0] frame_num;
  logic [31:0]        fq;     // triple holding the frame's first tick
  logic [1:0]         fs;     // slot of the frame's first tick in that triple
  logic [QW-1:0]      nq;     // words per channel for this frame
  logic [CHB-1:0]     iss_ch;
  logic [QW-1:0]      iss_q;

  // Words per channel: (fs + FRAME_TICKS - 1) / 3 + 1.
  always_comb nq = QW'((32'(fs) + 32'(FRAME_TICKS) - 32'd1) / 32'd3 + 32'd1);

  logic [31:0] need;
  logic        frame_ready;
  assign need        = fq + 32'(nq);
  assign frame_ready = $signed(wr_triples - need) >= 0;  // wrap-safe compare

  // Read pipeline and word FIFO.
  logic [RD_LAT-1:0]  vpipe;
  logic [35:0]        fifo [FIFO_DEPTH];
  logic [FB-1:0]      f_head, f_tail;
  logic [FB:0]        f_cnt;
  logic [FB:0]        inflight;
  logic               push, pop;

  always_comb begin
    inflight = '0;
    for (int i = 0; i < RD_LAT; i++) inflight += (FB+1)'(vpipe[i]);
  end

  assign rd_en   = (state == R_ISSUE) && !port_busy &&
                   ((f_cnt + inflight) < (FB+1)'(FIFO_DEPTH));
  logic [31:0] rd_q;
  assign rd_q    = fq + 32'(iss_q);
  assign rd_addr = {rd_q[QB-1:0], iss_ch};
  assign push    = vpipe[RD_LAT-1];

  // Unpacker.
  logic [CHB-1:0]    u_ch;
  logic [TICK_W-1:0] u_tick;
  logic [1:0]        u_slot;
  logic              u_eol, u_eof, fire;

  assign out_valid = (f_cnt != '0);
  assign u_eol     = (u_tick == TICK_W'(FRAME_TICKS - 1));
  assign u_eof     = u_eol && (u_ch == CHB'(NCH - 1));
  assign fire      = out_valid && out_ready;
  assign pop       = fire && (u_eol || u_slot == 2'd2);

  always_comb begin
    out          = '0;
    out.frame    = frame_num;
    out.ch       = CH_W'(u_ch);
    out.tick     = u_tick;
    out.adc      = fifo[f_head][12*u_slot +: 12];
    out.sol      = (u_tick == '0);
    out.eol      = u_eol;
    out.eof      = u_eof;
  end

  logic [31:0] adv;  // fs + FRAME_TICKS, for stepping to the next frame
  assign adv = 32'(fs) + 32'(FRAME_TICKS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= R_IDLE;
      frame_num <= '0;
      fq        <= '0;
      fs        <= '0;
      iss_ch    <= '0;
      iss_q     <= '0;
      vpipe     <= '0;
      f_head    <= '0;
      f_tail    <= '0;
      f_cnt     <= '0;
      u_ch      <= '0;
      u_tick    <= '0;
      u_slot    <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) fifo[i] <= '0;
    end else begin
      vpipe <= (vpipe << 1) | RD_LAT'(rd_en);
      if (push) begin
        fifo[f_tail] <= rd_data;
        f_tail       <= f_tail + 1'b1;
      end
      if (pop) f_head <= f_head + 1'b1;
      f_cnt <= f_cnt + (FB+1)'(push) - (FB+1)'(pop);

      case (state)
        R_IDLE: if (frame_ready) begin
          state  <= R_ISSUE;
          iss_ch <= '0;
          iss_q  <= '0;
        end
        R_ISSUE: if (rd_en) begin
          if (iss_q == nq - 1'b1) begin
            iss_q  <= '0;
            iss_ch <= iss_ch + 1'b1;
            if (iss_ch == CHB'(NCH - 1)) state <= R_WAIT;
          end else begin
            iss_q <= iss_q + 1'b1;
          end
        end
        default: ;  // R_WAIT: left when the unpacker sends the frame's last sample
      endcase

      if (fire) begin
        if (u_eol) begin
          u_tick <= '0;
          u_slot <= fs;
          u_ch   <= u_ch + 1'b1;
          if (u_eof) begin
            // Step to the next frame.
            state     <= R_IDLE;
            frame_num <= frame_num + 1'b1;
            fq        <= fq + adv / 32'd3;
            fs        <= 2'(adv % 32'd3);
            u_slot    <= 2'(adv % 32'd3);
            u_ch      <= '0;
          end
        end else begin
          u_tick <= u_tick + 1'b1;
          u_slot <= (u_slot == 2'd2) ? 2'd0 : u_slot + 1'b1;
        end
      end
    end
  end

  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(push && !pop && f_cnt == (FB+1)'(FIFO_DEPTH)));
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
