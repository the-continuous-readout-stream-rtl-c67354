// tb_zs_config: checks reset values, per-channel and FEM register writes and
// readback, that the outputs follow the writes, and that postsamples above 8
// are stored as 8.
module tb_zs_config;
  import sn_pkg::*;
  localparam int NCH = 8;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  adc_t ch_baseline [NCH];
  logic [11:0] ch_thr [NCH];
  thr_sign_e ch_sign [NCH];
  logic [2:0] pre; logic [3:0] post; logic [7:0] mean_tol, var_tol; logic [4:0] fem_addr;
  int checks = 0, failures = 0;

  zs_config #(.NCH(NCH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [11:0] eb [NCH], et [NCH];
  logic [1:0]  es [NCH];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(32'(pre), 7, "reset pre"); chk(32'(post), 8, "reset post");
    chk(32'(mean_tol), 2, "reset mean_tol"); chk(32'(var_tol), 3, "reset var_tol");
    for (int c = 0; c < NCH; c++) chk(32'(ch_sign[c]), 32'(THR_OFF), "reset sign");
    for (int c = 0; c < NCH; c++) begin
      eb[c] = 12'($urandom); et[c] = 12'($urandom); es[c] = 2'($urandom);
      wr(8'(c), {6'b0, es[c], et[c], eb[c]});
    end
    for (int c = 0; c < NCH; c++) begin
      chk(32'(ch_baseline[c]), 32'(eb[c]), "baseline"); chk(32'(ch_thr[c]), 32'(et[c]), "thr");
      chk(32'(ch_sign[c]), 32'(es[c]), "sign");
      cfg_addr = 8'(c); #1;
      chk(cfg_rdata, {6'b0, es[c], et[c], eb[c]}, "readback");
    end
    wr(8'h80, {3'b0, 5'd19, 8'd40, 8'd17, 4'd5, 1'b0, 3'd3});
    chk(32'(pre), 3, "pre"); chk(32'(post), 5, "post"); chk(32'(mean_tol), 17, "mean_tol");
    chk(32'(var_tol), 40, "var_tol"); chk(32'(fem_addr), 19, "fem_addr");
    wr(8'h80, {3'b0, 5'd1, 8'd1, 8'd1, 4'd15, 1'b0, 3'd7});
    chk(32'(post), 8, "post clamp"); chk(32'(pre), 7, "pre 7");
    cfg_addr = 8'h80; #1;
    chk(cfg_rdata, {3'b0, 5'd1, 8'd1, 8'd1, 4'd8, 1'b0, 3'd7}, "fem readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
