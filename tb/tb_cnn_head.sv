// tb_cnn_head: fills a 16 x 64 feature map with random values, starts the
// head, serves its row reads from that map, and compares logit and trigger
// with a model computed here: per-channel sum, floor division by 16 wrapped
// to 13 bits, dot product with the dense weights plus bias*256, floor
// division by 256 wrapped to 13 bits, trigger when logit > threshold. The
// threshold is set just below and just at the expected logit so both
// outcomes occur. Also checks done arrives 18 clocks after start.
module tb_cnn_head;
  import aitrig_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done, trigger;
  logic [5:0] row_addr;
  fx_t row [HEAD_CH], fc_w [HEAD_CH], fc_b, threshold, logit;
  int fm [HEAD_LEN][HEAD_CH];
  int checks = 0, failures = 0;

  cnn_head dut (.clk, .rst_n, .start, .row_addr, .row, .fc_w, .fc_b, .threshold, .done, .logit, .trigger);

  always #5 clk = ~clk;
  always_comb for (int c = 0; c < HEAD_CH; c++) row[c] = fx_t'(fm[row_addr % HEAD_LEN][c]);

  function automatic int wrap13(input longint v);
    longint m = v & 64'h1FFF;
    return int'(m >= 4096 ? m - 8192 : m);
  endfunction
  function automatic longint sx(input fx_t v);
    int t;
    t = v;
    return longint'(t);
  endfunction
  function automatic longint fdiv(input longint v, input longint d);
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 40; t++) begin
      longint dot;
      int exp_logit, cyc;
      for (int r = 0; r < HEAD_LEN; r++)
        for (int c = 0; c < HEAD_CH; c++) fm[r][c] = $urandom_range(0, 1023) - 512;
      for (int c = 0; c < HEAD_CH; c++) fc_w[c] = fx_t'($urandom_range(0, 255) - 128);
      fc_b = fx_t'($urandom_range(0, 511) - 256);
      dot = sx(fc_b) * 256;
      for (int c = 0; c < HEAD_CH; c++) begin
        longint s;
        s = 0;
        for (int r = 0; r < HEAD_LEN; r++) s += fm[r][c];
        dot += longint'(wrap13(fdiv(s, 16))) * sx(fc_w[c]);
      end
      exp_logit = wrap13(fdiv(dot, 256));
      threshold = fx_t'(exp_logit - (t % 2));
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != HEAD_LEN + 2) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if (int'(logit) != exp_logit) begin failures++; $display("FAIL logit %0d vs %0d", logit, exp_logit); end
      checks++;
      if (trigger != (t % 2 == 1)) begin failures++; $display("FAIL trigger"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
