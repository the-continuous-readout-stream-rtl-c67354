// tb_dataway_arbiter: a token loop (token_out returns as token_in after a few
// clocks, as if passed round the other FEMs of a crate) with random trigger and
// SN packet sources and a backplane that stalls at random. Checks that the
// dataway is driven only between receiving and passing the token, that packets
// arrive whole, in order and never interleaved, that exactly one packet is sent
// per token visit, and that a trigger packet waiting at a token visit always
// goes before an SN packet. Counts visits with both waiting (priority used),
// SN-only visits and empty visits.
module tb_dataway_arbiter;
  logic clk = 0, rst_n = 0;
  logic token_in = 0, token_out;
  logic trg_valid, trg_ready, trg_last, sn_valid, sn_ready, sn_last;
  logic [15:0] trg_data, sn_data, bp_data;
  logic bp_valid, bp_ready = 1, bp_last, bp_sn;
  int checks = 0, failures = 0;

  dataway_arbiter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Packet sources: packet p of a stream holds words {stream, p, index}; its
  // length is 1 + (p * 7) % 13.
  int trg_p = 0, trg_i = 0, sn_p = 0, sn_i = 0;
  bit trg_on = 0, sn_on = 0;
  function automatic int plen(int p); return 1 + (p * 7) % 13; endfunction
  assign trg_valid = trg_on;
  assign trg_data  = {1'b0, 7'(trg_p), 8'(trg_i)};
  assign trg_last  = (trg_i == plen(trg_p) - 1);
  assign sn_valid  = sn_on;
  assign sn_data   = {1'b1, 7'(sn_p), 8'(sn_i)};
  assign sn_last   = (sn_i == plen(sn_p) - 1);

  always @(posedge clk) if (rst_n) begin
    if (trg_valid && trg_ready) begin
      if (trg_last) begin trg_p <= trg_p + 1; trg_i <= 0; trg_on <= 0; end else trg_i <= trg_i + 1;
    end
    if (sn_valid && sn_ready) begin
      if (sn_last) begin sn_p <= sn_p + 1; sn_i <= 0; sn_on <= 0; end else sn_i <= sn_i + 1;
    end
  end
  always @(negedge clk) if (rst_n) begin
    if (!trg_on && $urandom_range(0, 60) == 0) trg_on = 1;
    if (!sn_on && $urandom_range(0, 25) == 0) sn_on = 1;
    bp_ready = ($urandom_range(0, 4) != 0);
  end

  // Token loop.
  int hold = 0;
  bit have_token = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    token_in = 1; @(negedge clk); token_in = 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (token_out) hold = 1 + $urandom_range(0, 6);
    else if (hold > 0) begin hold--; if (hold == 0) begin token_in <= 1; end end
    if (token_in) token_in <= 0;
  end

  // Monitor.
  int exp_tp = 0, exp_sp = 0, cur_stream = -1, cur_idx = 0, pk_in_visit = 0;
  int n_both = 0, n_sn_only = 0, n_empty = 0, n_trg = 0, n_sn = 0;
  bit in_visit = 0, trg_at_visit = 0, sn_at_visit = 0, decided = 0;
  always @(posedge clk) if (rst_n) begin
    if (token_in) begin in_visit = 1; pk_in_visit = 0; decided = 0; end
    else if (in_visit && !decided) begin
      // the arbiter decides one clock after the token arrives
      decided = 1; trg_at_visit = trg_valid; sn_at_visit = sn_valid;
      if (trg_valid && sn_valid) n_both++;
      else if (sn_valid) n_sn_only++;
      else if (!trg_valid) n_empty++;
    end
    if (bp_valid && bp_ready) begin
      int s, p, i;
      s = bp_data[15]; p = bp_data[14:8]; i = bp_data[7:0];
      checks++;
      if (!in_visit) begin failures++; $display("dataway driven without token"); end
      if (cur_stream == -1) begin
        cur_stream = s; cur_idx = 0;
        checks++;
        if (s == 1 && trg_at_visit) begin failures++; $display("SN packet sent while trigger packet waited"); end
      end
      checks++;
      if (s != cur_stream || s != int'(bp_sn) || p != ((s == 0) ? exp_tp : exp_sp) % 128 || i != cur_idx ||
          bp_last != (i == plen((s == 0) ? exp_tp : exp_sp) - 1)) begin
        failures++; $display("bad word s%0d p%0d i%0d last %0b", s, p, i, bp_last);
      end
      cur_idx++;
      if (bp_last) begin
        if (s == 0) begin exp_tp++; n_trg++; end else begin exp_sp++; n_sn++; end
        cur_stream = -1; pk_in_visit++;
      end
    end
    if (token_out) begin
      checks++;
      if (pk_in_visit > 1 || cur_stream != -1) begin failures++; $display("token passed mid-packet or after %0d packets", pk_in_visit); end
      in_visit = 0;
    end
  end

  initial begin
    wait (n_trg >= 25 && n_sn >= 60);
    checks++;
    if (n_both == 0 || n_sn_only == 0 || n_empty == 0) begin
      failures++; $display("mechanism missing: both %0d sn-only %0d empty %0d", n_both, n_sn_only, n_empty);
    end
    $display("trigger packets %0d SN packets %0d priority cases %0d", n_trg, n_sn, n_both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
