// tb_downsampler: checks that the downsampler passes exactly the first of every
// RATIO input vectors, unchanged, one clock after it arrived, with irregular
// gaps between input strobes. Inputs change on the falling edge.
module tb_downsampler;
  localparam int NCH = 4, RATIO = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [NCH-1:0][11:0] in_adc = '0, out_adc;
  int checks = 0, failures = 0;

  downsampler #(.NCH(NCH), .RATIO(RATIO)) dut (.*);
  always #5 clk = ~clk;

  // Reference: what the output must show after the coming rising edge.
  logic                 exp_valid = 0;
  logic [NCH-1:0][11:0] exp_adc = '0;
  int n_in = 0, n_out = 0;

  initial begin
    repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    #1;
    checks++;
    if (out_valid !== exp_valid || (exp_valid && out_adc !== exp_adc)) begin
      failures++; $display("mismatch at %0t: valid %0b/%0b data %h/%h", $time, out_valid, exp_valid, out_adc, exp_adc);
    end
    if (out_valid) n_out++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      for (int c = 0; c < NCH; c++) in_adc[c] = 12'($urandom);
      exp_valid = in_valid && (n_in % RATIO == 0);
      if (exp_valid) exp_adc = in_adc;
      if (in_valid) n_in++;
    end
    @(negedge clk); in_valid = 0; exp_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != (n_in + RATIO - 1) / RATIO) begin
      failures++; $display("count %0d vs %0d", n_out, (n_in + RATIO - 1) / RATIO);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
