// tb_ringbuf_writer: feeds random 2 MS/s-style sample vectors to the ring
// buffer writer, records every SRAM write in a model memory and checks, each
// time a triple completes, that the NCH words of that triple hold ticks 3q..3q+2
// of every channel at address {q mod ring, channel}. Also checks that each
// triple is written in NCH consecutive clocks and that the ring wraps.
module tb_ringbuf_writer;
  localparam int NCH = 4, ADDR_W = 6;          // ring of 16 triples
  localparam int NQ = (1 << ADDR_W) / NCH;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [NCH-1:0][11:0] in_adc = '0;
  logic sram_we;
  logic [ADDR_W-1:0] sram_addr;
  logic [35:0] sram_wdata;
  logic [31:0] wr_triples;
  int checks = 0, failures = 0;

  ringbuf_writer #(.NCH(NCH), .ADDR_W(ADDR_W)) dut (.*);
  always #5 clk = ~clk;

  logic [35:0] mem [1 << ADDR_W];
  logic [11:0] hist [$][NCH];   // every input vector, by tick
  int we_run = 0, last_trip = 0, wraps = 0;

  initial begin
    repeat (40000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (sram_we) begin
      mem[sram_addr] <= sram_wdata;
      we_run++;
    end else if (we_run != 0) begin
      checks++;
      if (we_run != NCH) begin failures++; $display("write burst of %0d clocks", we_run); end
      we_run = 0;
    end
  end

  // Check a triple once it is reported complete.
  always @(negedge clk) if (rst_n && int'(wr_triples) != last_trip) begin
    int q;
    q = last_trip;
    last_trip = int'(wr_triples);
    if (q > 0 && q % NQ == 0) wraps++;
    for (int c = 0; c < NCH; c++) begin
      logic [35:0] exp;
      exp = {hist[3*q+2][c], hist[3*q+1][c], hist[3*q][c]};
      checks++;
      if (mem[(q % NQ) * NCH + c] !== exp) begin
        failures++; $display("triple %0d ch %0d: %h vs %h", q, c, mem[(q % NQ) * NCH + c], exp);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      logic [11:0] v [NCH];
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < NCH; c++) begin v[c] = 12'($urandom); in_adc[c] = v[c]; end
      hist.push_back(v);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(NCH / 2, NCH + 2)) @(negedge clk);
    end
    repeat (NCH + 4) @(negedge clk);
    checks++;
    if (wr_triples != 32'(120 / 3)) begin failures++; $display("triples %0d", wr_triples); end
    checks++;
    if (wraps < 2) begin failures++; $display("ring did not wrap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
