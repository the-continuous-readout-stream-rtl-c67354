// fem_sn_top: supernova (continuous readout) stream of one front-end module
// (FEM) of the MicroBooNE TPC readout, from the digitized ADC samples to the
// crate backplane.
//
// Dataflow (after the paper): 64 channels sampled at 16 MS/s -> downsampler
// (2 MS/s) -> ringbuf_writer (time-ordered writes into the external 1 M x 36
// SRAM ring buffer) -> ringbuf_sn_reader (each completed 1.6 ms frame read back
// channel by channel) -> [dynamic_baseline, when DYNAMIC_BASELINE = 1] ->
// zero_suppress (thresholds, presamples, postsamples) -> huffman_encoder ->
// frame_builder (12-word header + payload) -> dataway_arbiter (backplane shared
// with the trigger stream, trigger first, token passing). zs_config holds the
// run configuration written through a simple register port.
//
// The paper's main configuration uses static per-channel baselines and
// thresholds (DYNAMIC_BASELINE = 0, the default); the dynamic-baseline version
// is the alternative firmware the paper also ran.
//
// External parts are reached through ports: the ADCs (adc_valid/adc_data), the
// SRAM (one synchronous port, read data RD_LAT clocks after sram_re, the writer
// has priority), the trigger-stream readout (trg_*), the token chain of the
// crate and the backplane dataway (bp_*).
//
// Clocking: one clock for everything. The SN datapath handles one sample per
// clock, and 64 channels x 2 MS/s = 128 MS/s, so the clock must run somewhat
// faster than 128 MHz (the paper's SRAM clock) to keep up over time; the
// paper does not give the FPGA fabric clock. adc_valid sets the sample rate.
// cfg_rdata[31:29] are always zero (unused bits of the register map).
module fem_sn_top
  import sn_pkg::*;
#(
  parameter int NCH              = 64,   // channels per FEM (paper: 64)
  parameter int FRAME_TICKS      = 3200, // samples per channel per frame (paper: 1.6 ms at 2 MS/s)
  parameter int DS_RATIO         = 8,    // 16 MS/s -> 2 MS/s (paper)
  parameter int SRAM_AW          = 20,   // SRAM address bits (paper: 1 M x 36)
  parameter int RD_LAT           = 2,    // SRAM read latency (assumed)
  parameter int BUF_AW           = 18,   // SN frame payload buffer, 2^BUF_AW words
  parameter bit DYNAMIC_BASELINE = 0     // 0: static baselines (paper's adopted mode)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ADC samples at 16 MS/s
  input  logic                          adc_valid,
  input  logic [NCH-1:0][ADC_W-1:0]     adc_data,
  // configuration register port
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  output logic [31:0]                   cfg_rdata,
  // external SRAM ring buffer
  output logic                          sram_we,
  output logic                          sram_re,
  output logic [SRAM_AW-1:0]            sram_addr,
  output logic [35:0]                   sram_wdata,
  input  logic [35:0]                   sram_rdata,
  // trigger-stream packets (from the trigger readout, not part of this design)
  input  logic                          trg_valid,
  output logic                          trg_ready,
  input  logic [WORD_W-1:0]             trg_data,
  input  logic                          trg_last,
  // crate token chain and backplane dataway
  input  logic                          token_in,
  output logic                          token_out,
  output logic                          bp_valid,
  input  logic                          bp_ready,
  output logic [WORD_W-1:0]             bp_data,
  output logic                          bp_last,
  output logic                          bp_sn,
  // status
  output logic                          sn_buf_overflow
);
  // Configuration.
  adc_t             ch_baseline [NCH];
  logic [ADC_W-1:0] ch_thr      [NCH];
  thr_sign_e        ch_sign     [NCH];
  logic [2:0]       pre;
  logic [3:0]       post;
  logic [7:0]       mean_tol, var_tol;
  logic [4:0]       fem_addr;

  zs_config #(.NCH(NCH)) u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .ch_baseline, .ch_thr, .ch_sign, .pre, .post, .mean_tol, .var_tol, .fem_addr
  );

  // Downsampling and ring-buffer write.
  logic                      ds_valid;
  logic [NCH-1:0][ADC_W-1:0] ds_adc;
  downsampler #(.NCH(NCH), .RATIO(DS_RATIO)) u_ds (
    .clk, .rst_n, .in_valid(adc_valid), .in_adc(adc_data),
    .out_valid(ds_valid), .out_adc(ds_adc)
  );

  logic               w_we;
  logic [SRAM_AW-1:0] w_addr;
  logic [31:0]        wr_triples;
  ringbuf_writer #(.NCH(NCH), .ADDR_W(SRAM_AW)) u_wr (
    .clk, .rst_n, .in_valid(ds_valid), .in_adc(ds_adc),
    .sram_we(w_we), .sram_addr(w_addr), .sram_wdata(sram_wdata), .wr_triples
  );

  // Channel-ordered SN readback.
  logic               r_en;
  logic [SRAM_AW-1:0] r_addr;
  logic               rd_valid, rd_ready;
  sample_t            rd_s;
  ringbuf_sn_reader #(.NCH(NCH), .ADDR_W(SRAM_AW), .FRAME_TICKS(FRAME_TICKS),
                      .RD_LAT(RD_LAT)) u_rd (
    .clk, .rst_n, .wr_triples, .port_busy(w_we),
    .rd_en(r_en), .rd_addr(r_addr), .rd_data(sram_rdata),
    .out_valid(rd_valid), .out_ready(rd_ready), .out(rd_s)
  );

  assign sram_we   = w_we;
  assign sram_re   = r_en;
  assign sram_addr = w_we ? w_addr : r_addr;

  // Baseline.
  logic    bl_valid, bl_ready;
  sample_t bl_s;
  if (DYNAMIC_BASELINE) begin : g_dyn
    dynamic_baseline #(.NCH(NCH)) u_dbl (
      .clk, .rst_n, .mean_tol, .var_tol,
      .in_valid(rd_valid), .in_ready(rd_ready), .in(rd_s),
      .out_valid(bl_valid), .out_ready(bl_ready), .out(bl_s)
    );
  end else begin : g_static
    assign bl_valid = rd_valid;
    assign rd_ready = bl_ready;
    assign bl_s     = rd_s;
  end

  // Zero suppression, Huffman coding, framing.
  logic     zs_valid, zs_ready;
  zs_item_t zs_item;
  zero_suppress #(.NCH(NCH), .USE_STREAM_BASELINE(DYNAMIC_BASELINE)) u_zs (
    .clk, .rst_n, .cfg_pre(pre), .cfg_post(post),
    .ch_baseline, .ch_thr, .ch_sign,
    .in_valid(bl_valid), .in_ready(bl_ready), .in(bl_s),
    .out_valid(zs_valid), .out_ready(zs_ready), .out(zs_item)
  );

  logic  hf_valid, hf_ready;
  word_t hf_word;
  huffman_encoder u_hf (
    .clk, .rst_n, .in_valid(zs_valid), .in_ready(zs_ready), .in(zs_item),
    .out_valid(hf_valid), .out_ready(hf_ready), .out(hf_word)
  );

  logic              fb_valid, fb_ready, fb_last;
  logic [WORD_W-1:0] fb_data;
  frame_builder #(.BUF_AW(BUF_AW)) u_fb (
    .clk, .rst_n, .fem_addr, .in_valid(hf_valid), .in_ready(hf_ready), .in(hf_word),
    .out_valid(fb_valid), .out_ready(fb_ready), .out_data(fb_data), .out_last(fb_last),
    .overflow(sn_buf_overflow)
  );

  dataway_arbiter u_arb (
    .clk, .rst_n, .token_in, .token_out,
    .trg_valid, .trg_ready, .trg_data, .trg_last,
    .sn_valid(fb_valid), .sn_ready(fb_ready), .sn_data(fb_data), .sn_last(fb_last),
    .bp_valid, .bp_ready, .bp_data, .bp_last, .bp_sn
  );

endmodule
