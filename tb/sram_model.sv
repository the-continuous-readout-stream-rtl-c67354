// sram_model: behavioural model of the external synchronous SRAM of the ring
// buffer (one port, write on we, read data RD_LAT clocks after re). Words
// never written read as zero.
module sram_model #(
  parameter int AW     = 20,
  parameter int DW     = 36,
  parameter int RD_LAT = 2
) (
  input  logic          clk,
  input  logic          we,
  input  logic          re,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [1 << AW];
  logic [DW-1:0] pipe [RD_LAT];

  initial begin
    for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
    for (int i = 0; i < RD_LAT; i++) pipe[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    pipe[0] <= re ? mem[addr] : '0;
    for (int i = 1; i < RD_LAT; i++) pipe[i] <= pipe[i-1];
  end
  assign rdata = pipe[RD_LAT-1];
endmodule
