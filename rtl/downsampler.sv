// downsampler: reduces the 16 MS/s ADC sample stream of a FEM to 2 MS/s.
//
// The FEM digitizes its 64 channels with eight octal 12-bit ADCs at 16 MS/s and
// the FPGA downsamples to 2 MS/s before the data enter the ring buffer (this
// follows the paper). The paper does not say how; this block keeps one sample
// vector out of every RATIO (plain decimation, first of each group of RATIO),
// the simplest circuit that gives the stated rate.
//
// Interface: in_valid strobes a vector of NCH samples (one per channel);
// out_valid strobes every RATIO-th input vector, registered, one clock after
// the input that produced it. The clock is free-running; the sample rate is
// set by the in_valid strobes.
module downsampler #(
  parameter int NCH   = 64,  // channels per FEM (paper: 64)
  parameter int RATIO = 8    // 16 MS/s / 2 MS/s (paper)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [NCH-1:0][sn_pkg::ADC_W-1:0] in_adc,
  output logic                         out_valid,
  output logic [NCH-1:0][sn_pkg::ADC_W-1:0] out_adc
);
  localparam int PH_W = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [PH_W-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      out_valid <= 1'b0;
      out_adc   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (phase == PH_W'(0)) begin
          out_valid <= 1'b1;
          out_adc   <= in_adc;
        end
        phase <= (phase == PH_W'(RATIO - 1)) ? '0 : phase + 1'b1;
      end
    end
  end

endmodule
