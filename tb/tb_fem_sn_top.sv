// tb_fem_sn_top: end-to-end test of fem_sn_top at reduced size (4 channels,
// 128-sample frames, a 3-frame SRAM ring), twice: with static baselines (the
// default mode) and with the dynamic baseline. Each instance runs six frames
// through downsampling, the SRAM ring buffer (with wrap-around), channel-ordered
// readback, zero suppression, Huffman coding, frame building and the shared
// dataway with injected trigger packets; tb_sn_env decodes every frame record
// and compares it with its reference. Checks the processing keeps pace: all
// frames arrive within a fixed number of clocks.
module tb_fem_sn_top;
  localparam int NCH = 4, FT = 128, ADC_DIV = 2, NFRAMES = 6, SRAM_AW = 9;

  logic done [2];
  int   checks [2], failures [2];

  for (genvar m = 0; m < 2; m++) begin : g_mode
    logic clk, rst_n, adc_valid, cfg_we, sram_we, sram_re, trg_valid, trg_ready, trg_last;
    logic token_in, token_out, bp_valid, bp_ready, bp_last, bp_sn, sn_buf_overflow;
    logic [NCH-1:0][11:0] adc_data;
    logic [7:0] cfg_addr;
    logic [31:0] cfg_wdata, cfg_rdata;
    logic [SRAM_AW-1:0] sram_addr;
    logic [35:0] sram_wdata, sram_rdata;
    logic [15:0] trg_data, bp_data;

    fem_sn_top #(.NCH(NCH), .FRAME_TICKS(FT), .SRAM_AW(SRAM_AW), .BUF_AW(12),
                 .DYNAMIC_BASELINE(m == 1)) dut (.*);
    sram_model #(.AW(SRAM_AW), .RD_LAT(2)) u_sram (
      .clk, .we(sram_we), .re(sram_re), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));
    tb_sn_env #(.NCH(NCH), .FT(FT), .ADC_DIV(ADC_DIV), .NFRAMES(NFRAMES), .SRAM_AW(SRAM_AW),
                .DYN(m == 1)) env (
      .clk, .rst_n, .adc_valid, .adc_data, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
      .sram_we, .sram_addr, .trg_valid, .trg_ready, .trg_data, .trg_last, .token_in, .token_out,
      .bp_valid, .bp_ready, .bp_data, .bp_last, .bp_sn, .sn_buf_overflow,
      .done(done[m]), .checks(checks[m]), .failures(failures[m]));
  end

  // A frame takes FT * 8 * ADC_DIV clocks to acquire; allow two frames of slack.
  localparam int LIMIT = (NFRAMES + 3) * FT * 8 * ADC_DIV + 2000;
  initial begin
    fork
      begin wait (done[0] && done[1]); end
      begin
        repeat (LIMIT) @(posedge g_mode[0].clk);
        $display("watchdog expired: frames did not all arrive in %0d clocks", LIMIT);
      end
    join_any
    g_mode[0].env.summary();
    g_mode[1].env.summary();
    begin
      int c, f;
      c = checks[0] + checks[1];
      f = failures[0] + failures[1] + ((done[0] && done[1]) ? 0 : 1);
      $display("TB_RESULT checks=%0d failures=%0d", c, f);
    end
    $finish;
  end
endmodule
