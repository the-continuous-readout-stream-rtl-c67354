// ringbuf_writer: writes the 2 MS/s sample vectors of a FEM into the external
// SRAM ring buffer in time order.
//
// The paper stores the downsampled data "in time order" in a 1 M x 36-bit
// 128 MHz SRAM used as a ring buffer. How samples are packed into the 36-bit
// words is not given; this design packs three consecutive samples of one
// channel (ticks 3q, 3q+1, 3q+2 in bits 11:0, 23:12, 35:24) into one word, so
// that one word-write per channel every three ticks stores the stream and a
// channel-ordered read fetches three samples per access. The word address is
// {q mod 2^(ADDR_W-log2 NCH), channel}: a "triple" q occupies NCH consecutive
// words and the ring wraps after 2^ADDR_W / NCH triples (16384 triples =
// 49152 ticks = 15.36 frames of 1.6 ms at the defaults).
//
// Timing: the first two vectors of a triple are held in registers; when the
// third arrives the NCH packed words are written in NCH consecutive clocks
// (sram_we high). The writer owns the SRAM port whenever sram_we is high; the
// reader must not use it then. wr_triples counts completed triples and tells
// the reader which data are in the SRAM. A new triple must not complete while
// the previous one is still being written (asserted); this needs at least NCH
// clocks per three input vectors.
module ringbuf_writer #(
  parameter int NCH    = 64,  // channels per FEM (power of two)
  parameter int ADDR_W = 20   // SRAM address width (paper: 1 M words)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [NCH-1:0][sn_pkg::ADC_W-1:0] in_adc,
  output logic                              sram_we,
  output logic [ADDR_W-1:0]                 sram_addr,
  output logic [35:0]                       sram_wdata,
  output logic [31:0]                       wr_triples
);
  localparam int CHB = $clog2(NCH);
  localparam int QB  = ADDR_W - CHB;

  logic [NCH-1:0][sn_pkg::ADC_W-1:0] hold0, hold1;
  logic [1:0]      slot;
  logic [35:0]     pend [NCH];
  logic            busy;
  logic [CHB-1:0]  wch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold0      <= '0;
      hold1      <= '0;
      slot       <= '0;
      busy       <= 1'b0;
      wch        <= '0;
      wr_triples <= '0;
      for (int c = 0; c < NCH; c++) pend[c] <= '0;
    end else begin
      // Finish the current triple first so that a new one latched in the
      // same clock takes over busy and wch.
      if (busy) begin
        wch <= wch + 1'b1;
        if (wch == CHB'(NCH - 1)) begin
          busy       <= 1'b0;
          wr_triples <= wr_triples + 1'b1;
        end
      end
      if (in_valid) begin
        case (slot)
          2'd0: begin hold0 <= in_adc; slot <= 2'd1; end
          2'd1: begin hold1 <= in_adc; slot <= 2'd2; end
          default: begin
            for (int c = 0; c < NCH; c++) pend[c] <= {in_adc[c], hold1[c], hold0[c]};
            busy <= 1'b1;
            wch  <= '0;
            slot <= 2'd0;
          end
        endcase
      end
    end
  end

  assign sram_we    = busy;
  assign sram_addr  = {wr_triples[QB-1:0], wch};
  assign sram_wdata = pend[wch];

  // The previous triple must be fully written before the next one is latched.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    !(in_valid && slot == 2'd2 && busy && wch != CHB'(NCH - 1)));

endmodule
