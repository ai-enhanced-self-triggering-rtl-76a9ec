// tb_layer_sequencer: runs three classifications and records every issued
// MAC step. For each layer it checks the number of steps (128, 64, 128, 64,
// 64, 64, 128 with 32 x 16 lanes), that steps come in position, group,
// chunk order with first/last on the right chunks, that exactly one idle
// cycle separates layers, that head_start follows the last layer after the
// drain, and that done comes in the cycle head_done is given.
module tb_layer_sequencer;
  import aitrig_pkg::*;
  localparam int LEN  [7] = '{128, 64, 64, 64, 32, 32, 32};
  localparam int NGRP [7] = '{1, 1, 1, 1, 1, 1, 2};
  localparam int NCHK [7] = '{1, 1, 2, 1, 2, 2, 2};
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, head_done = 1'b0;
  logic busy, iss_valid, iss_first, iss_last, head_start, done;
  logic [2:0] iss_layer, iss_grp, iss_chk;
  logic [7:0] iss_pos;
  int checks = 0, failures = 0;

  layer_sequencer dut (.clk, .rst_n, .start, .busy, .iss_valid, .iss_layer, .iss_pos, .iss_grp,
                       .iss_chk, .iss_first, .iss_last, .head_start, .head_done, .done);

  always #5 clk = ~clk;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int run = 0; run < 3; run++) begin
      int total;
      total = 0;
      @(negedge clk);
      chk(!busy, "idle before start");
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int l = 0; l < 7; l++) begin
        for (int p = 0; p < LEN[l]; p++)
          for (int g = 0; g < NGRP[l]; g++)
            for (int c = 0; c < NCHK[l]; c++) begin
              chk(iss_valid && iss_layer == 3'(l) && iss_pos == 8'(p) && iss_grp == 3'(g) && iss_chk == 3'(c),
                  $sformatf("step l%0d p%0d g%0d c%0d", l, p, g, c));
              chk(iss_first == (c == 0) && iss_last == (c == NCHK[l] - 1), "first/last");
              total++;
              @(negedge clk);
            end
        chk(!iss_valid && busy, "drain cycle");
        @(negedge clk);
      end
      chk(total == 640, "640 steps");
      chk(head_start && !iss_valid, "head start");
      @(negedge clk);
      chk(!head_start, "head start is a pulse");
      repeat (5) begin chk(!done && busy, "waits for head"); @(negedge clk); end
      head_done = 1'b1;
      #1;
      chk(done, "done with head_done");
      @(negedge clk);
      head_done = 1'b0;
      chk(!busy && !done, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
