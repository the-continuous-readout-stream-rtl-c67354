// tb_ringbuf_sn_reader: the testbench plays the ring-buffer writer: it stores
// triples of a known waveform f(tick, channel) in an SRAM model and advances
// wr_triples, while randomly occupying the SRAM port and stalling the output.
// Checks that every frame comes out channel by channel with the right samples,
// ticks and sol/eol/eof flags, that no sample is read before it was written,
// and that frames whose first tick falls at slots 0, 1 and 2 of a word (a
// frame length of 16 is not a multiple of 3) and a wrapping ring all work.
module tb_ringbuf_sn_reader;
  import sn_pkg::*;
  localparam int NCH = 4, ADDR_W = 7, FT = 16, RD_LAT = 2;  // ring of 32 triples
  localparam int NQ = (1 << ADDR_W) / NCH;
  localparam int NFRAMES = 9;
  logic clk = 0, rst_n = 0;
  logic [31:0] wr_triples = 0;
  logic port_busy = 0, rd_en, out_valid, out_ready = 0;
  logic [ADDR_W-1:0] rd_addr, waddr = '0;
  logic [35:0] rd_data, wdata = '0;
  logic we = 0;
  sample_t out;
  int checks = 0, failures = 0;

  ringbuf_sn_reader #(.NCH(NCH), .ADDR_W(ADDR_W), .FRAME_TICKS(FT), .RD_LAT(RD_LAT), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n, .wr_triples, .port_busy, .rd_en, .rd_addr, .rd_data, .out_valid, .out_ready, .out);
  sram_model #(.AW(ADDR_W), .RD_LAT(RD_LAT)) u_sram (.clk, .we, .re(rd_en), .addr(we ? waddr : rd_addr), .wdata, .rdata(rd_data));
  always #5 clk = ~clk;

  function automatic logic [11:0] f(int t, int c);
    return 12'((t * 37 + c * 1001 + (t >> 3)) & 12'hFFF);
  endfunction

  initial begin
    repeat (200000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ef = 0, ec = 0, et = 0;      // next expected frame, channel, tick
  logic [2:0] start_slots = '0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (rd_en && port_busy) begin failures++; $display("read while port busy"); end
    if (out_valid && out_ready) begin
      int abs_t;
      abs_t = ef * FT + et;
      checks++;
      if (out.frame != FRAME_W'(ef) || out.ch != CH_W'(ec) || out.tick != TICK_W'(et) ||
          out.adc != f(abs_t, ec) || out.sol != (et == 0) || out.eol != (et == FT - 1) ||
          out.eof != (et == FT - 1 && ec == NCH - 1)) begin
        failures++;
        $display("sample f%0d c%0d t%0d: got f%0d c%0d t%0d adc %h exp %h flags %b%b%b",
                 ef, ec, et, out.frame, out.ch, out.tick, out.adc, f(abs_t, ec), out.sol, out.eol, out.eof);
      end
      checks++;
      if (abs_t / 3 >= int'(wr_triples)) begin failures++; $display("sample read before written"); end
      if (et == 0 && ec == 0) start_slots[abs_t % 3] = 1'b1;
      et++;
      if (et == FT) begin et = 0; ec++; if (ec == NCH) begin ec = 0; ef++; end end
    end
  end

  // Writer emulation: one triple per period; the port is busy NCH clocks per triple.
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < (NFRAMES + 1) * FT / 3 + 2; q++) begin
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        we = 1; port_busy = 1;
        waddr = ADDR_W'((q % NQ) * NCH + c);
        wdata = {f(3*q+2, c), f(3*q+1, c), f(3*q, c)};
      end
      @(negedge clk);
      we = 0; port_busy = 0;
      wr_triples = 32'(q + 1);
      // hold the writer back so the reader has to wait for data sometimes
      repeat ($urandom_range(4, 3 * NCH * 3)) begin
        @(negedge clk);
        port_busy = ($urandom_range(0, 3) == 0);
      end
      port_busy = 0;
      // do not overrun the reader: keep within the ring
      while ((q + 1) * 3 - ef * FT > (NQ - 2) * 3) @(negedge clk);
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  initial begin
    wait (ef == NFRAMES);
    repeat (5) @(negedge clk);
    checks++;
    if (start_slots != 3'b111) begin failures++; $display("frame start slots seen: %b", start_slots); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
