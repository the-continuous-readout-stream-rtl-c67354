// zs_config: run configuration registers of the SN stream of one FEM.
//
// Holds what the paper lists as configurable: per channel, the static baseline
// (the mode of the channel's ADC distribution in a reference run), the ZS
// threshold and its sign (positive, negative or either); per FEM, the numbers
// of presamples and postsamples (paper: 7 and 8, the largest the firmware
// allows) and the two tolerances of the dynamic baseline (rounded-mean and
// truncated-variance differences; paper example values 2 and 3). The FEM
// address used in the frame header is also kept here.
//
// The register map and the reset values of the per-channel registers are this
// design's choice: address {0, ch} holds a channel, 8'h80 the FEM settings.
//   channel word: [11:0] baseline, [23:12] threshold, [25:24] sign (thr_sign_e)
//   FEM word:     [2:0] presamples, [7:4] postsamples (values above 8 are
//                 stored as 8), [15:8] mean tolerance, [23:16] variance
//                 tolerance, [28:24] FEM address
// Channels reset to sign THR_OFF (never pass, so no samples are kept) and
// the FEM word to presamples 7, postsamples 8, tolerances 2 and 3, address 0.
// Writes take effect on the next clock; rdata is combinational, and its bits
// 31:29 (and bit 3 of the FEM word) read as zero.
module zs_config
  import sn_pkg::*;
#(
  parameter int NCH = 64   // channels per FEM (paper: 64)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [7:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  output logic [31:0]          cfg_rdata,
  output adc_t                 ch_baseline [NCH],
  output logic [ADC_W-1:0]     ch_thr      [NCH],
  output thr_sign_e            ch_sign     [NCH],
  output logic [2:0]           pre,
  output logic [3:0]           post,
  output logic [7:0]           mean_tol,
  output logic [7:0]           var_tol,
  output logic [4:0]           fem_addr
);
  localparam int CHB = $clog2(NCH);
  localparam logic [3:0] POST_MAX = 4'd8;

  logic          is_fem;
  logic [CHB-1:0] ch_sel;
  assign is_fem = cfg_addr[7];
  assign ch_sel = cfg_addr[CHB-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        ch_baseline[c] <= '0;
        ch_thr[c]      <= '0;
        ch_sign[c]     <= THR_OFF;
      end
      pre      <= 3'd7;
      post     <= 4'd8;
      mean_tol <= 8'd2;
      var_tol  <= 8'd3;
      fem_addr <= '0;
    end else if (cfg_we) begin
      if (is_fem) begin
        pre      <= cfg_wdata[2:0];
        post     <= (cfg_wdata[7:4] > POST_MAX) ? POST_MAX : cfg_wdata[7:4];
        mean_tol <= cfg_wdata[15:8];
        var_tol  <= cfg_wdata[23:16];
        fem_addr <= cfg_wdata[28:24];
      end else if (32'(cfg_addr[6:0]) < NCH) begin
        ch_baseline[ch_sel] <= cfg_wdata[11:0];
        ch_thr[ch_sel]      <= cfg_wdata[23:12];
        ch_sign[ch_sel]     <= thr_sign_e'(cfg_wdata[25:24]);
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (is_fem)
      cfg_rdata = {3'b0, fem_addr, var_tol, mean_tol, post, 1'b0, pre};
    else if (32'(cfg_addr[6:0]) < NCH)
      cfg_rdata = {6'b0, ch_sign[ch_sel], ch_thr[ch_sel], ch_baseline[ch_sel]};
  end

endmodule
