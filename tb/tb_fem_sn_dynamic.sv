// tb_fem_sn_dynamic: full-size run of fem_sn_top (64 channels, 3200-sample
// frames, 1 M x 36 SRAM) built with the sliding-window dynamic baseline
// instead of static baselines, with mean and variance tolerances of 2 and 3.
// Three frames; half the channels step up by 20 counts from frame 2 on, so
// the baseline must follow. tb_sn_env evaluates the block-by-block baseline
// rule directly on each channel's waveform and checks every decoded sample.
// ADC vectors every 10 clocks; the watchdog allows one extra frame time.
module tb_fem_sn_dynamic;
  import sn_pkg::*;
  localparam int NCH = 64, FT = 3200, ADC_DIV = 10, NFRAMES = 3, SRAM_AW = 20;

  logic clk, rst_n, adc_valid, cfg_we, sram_we, sram_re, trg_valid, trg_ready, trg_last;
  logic token_in, token_out, bp_valid, bp_ready, bp_last, bp_sn, sn_buf_overflow, done;
  logic [NCH-1:0][11:0] adc_data;
  logic [7:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [SRAM_AW-1:0] sram_addr;
  logic [35:0] sram_wdata, sram_rdata;
  logic [15:0] trg_data, bp_data;
  int checks, failures;

  fem_sn_top #(.DYNAMIC_BASELINE(1)) dut (.*);
  sram_model #(.AW(SRAM_AW), .RD_LAT(2)) u_sram (
    .clk, .we(sram_we), .re(sram_re), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));
  tb_sn_env #(.NCH(NCH), .FT(FT), .ADC_DIV(ADC_DIV), .NFRAMES(NFRAMES), .SRAM_AW(SRAM_AW),
              .DYN(1)) env (
    .clk, .rst_n, .adc_valid, .adc_data, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .sram_we, .sram_addr, .trg_valid, .trg_ready, .trg_data, .trg_last, .token_in, .token_out,
    .bp_valid, .bp_ready, .bp_data, .bp_last, .bp_sn, .sn_buf_overflow,
    .done, .checks, .failures);

  localparam int LIMIT = (NFRAMES + 1) * FT * 8 * ADC_DIV + 20000;
  initial begin
    fork
      begin wait (done); end
      begin
        repeat (LIMIT) @(posedge clk);
        $display("watchdog expired: frames did not all arrive in %0d clocks", LIMIT);
      end
    join_any
    env.summary();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + (done ? 0 : 1));
    $finish;
  end
endmodule
