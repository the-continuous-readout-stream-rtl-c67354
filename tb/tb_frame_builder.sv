// tb_frame_builder: sends frames of random payload words (including an empty
// frame) with random gaps, stalls the output at random, and checks each frame
// record: the twelve header words (marker and FEM address, word count,
// sequential identifier, frame number, 32-bit checksum, reserved zeros), the
// payload in order, out_last on the final word, and that input is held off
// while a frame is sent. A final frame larger than the buffer must raise the
// overflow flag and keep the first 2^BUF_AW words.
module tb_frame_builder;
  import sn_pkg::*;
  localparam int BUF_AW = 8;
  logic clk = 0, rst_n = 0;
  logic [4:0] fem_addr = 5'd13;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last, overflow;
  word_t in = '0;
  logic [15:0] out_data;
  int checks = 0, failures = 0;

  frame_builder #(.BUF_AW(BUF_AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [15:0] rec [$];
  logic [15:0] recs [$][$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rec.push_back(out_data);
    if (out_last) begin recs.push_back(rec); rec.delete(); end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  logic acc;
  always @(posedge clk) acc <= in_valid && in_ready;
  int n_held = 0;
  always @(posedge clk) if (in_valid && !in_ready) n_held++;

  task automatic send(word_t w);
    in = w; in_valid = 1;
    @(posedge clk); #1;
    while (!acc) begin @(posedge clk); #1; end
    in_valid = 0;
    if ($urandom_range(0, 3) == 0) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic chk(int g, int e, string what);
    checks++;
    if (g != e) begin failures++; $display("%s: got %0d exp %0d", what, g, e); end
  endtask

  logic [15:0] sent [$][$];
  int fnum [$];
  initial begin
    int sizes [5] = '{37, 0, 200, 1, 256};
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (sizes[i]) begin
      logic [15:0] p [$];
      p.delete();
      for (int k = 0; k < sizes[i]; k++) begin
        word_t w;
        w = '0; w.data = 16'($urandom); w.frame = FRAME_W'(100 + i);
        p.push_back(w.data);
        send(w);
      end
      send('{eof: 1'b1, frame: FRAME_W'(100 + 7 * i), data: 16'h0});
      sent.push_back(p); fnum.push_back(100 + 7 * i);
    end
    // overflow frame: 260 words into a 256-word buffer
    begin
      logic [15:0] p [$];
      p.delete();
      for (int k = 0; k < 260; k++) begin
        word_t w;
        w = '0; w.data = 16'($urandom);
        if (k < 256) p.push_back(w.data);
        send(w);
      end
      send('{eof: 1'b1, frame: FRAME_W'(999), data: 16'h0});
      sent.push_back(p); fnum.push_back(999);
    end
    repeat (800) @(negedge clk);
    chk(recs.size(), sent.size(), "frames");
    for (int i = 0; i < recs.size() && i < sent.size(); i++) begin
      int sum;
      sum = 0;
      foreach (sent[i][k]) sum += int'(sent[i][k]);
      chk(recs[i].size(), 12 + sent[i].size(), "record length");
      chk(int'(recs[i][0]), 'hF000 | 13, "marker/FEM");
      chk(int'({recs[i][1], recs[i][2]}), sent[i].size(), "word count");
      chk(int'({recs[i][3], recs[i][4]}), i, "sequence id");
      chk(int'({recs[i][5], recs[i][6]}), fnum[i], "frame number");
      chk(int'({recs[i][7], recs[i][8]}), sum, "checksum");
      chk(int'(recs[i][9]) + int'(recs[i][10]) + int'(recs[i][11]), 0, "reserved");
      for (int k = 0; k < sent[i].size() && 12 + k < recs[i].size(); k++)
        chk(int'(recs[i][12 + k]), int'(sent[i][k]), "payload");
    end
    chk(int'(overflow), 1, "overflow flag");
    checks++;
    if (n_held == 0) begin failures++; $display("input never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
