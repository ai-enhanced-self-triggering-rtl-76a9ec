// tb_post_proc: random accumulators, biases and residual inputs through the
// write-back stage in every combination of ReLU, residual add and pooling.
// The expected value is worked out here with integer arithmetic: add
// bias*256, floor-divide by 256, wrap to 13 bits, clamp negatives for ReLU,
// add the residual and wrap again, and for pooling take the larger value of
// positions 2r and 2r+1, written to row r only at the odd position.
module tb_post_proc;
  import aitrig_pkg::*;
  localparam int OCL = 8, NGRP = 2;
  logic clk = 1'b0, valid = 1'b0, relu_en, res_en, pool_en;
  logic [7:0] pos, out_ch;
  logic [2:0] grp, wr_grp;
  acc_t acc [OCL];
  fx_t bias [OCL], res_in [OCL], wr_data [OCL];
  logic wr_en;
  logic [5:0] wr_row;
  logic [OCL-1:0] wr_mask;
  int held [NGRP][OCL];
  int checks = 0, failures = 0;

  post_proc #(.OCL(OCL), .NGRP(NGRP)) dut (
    .clk, .valid, .pos, .grp, .acc, .bias, .res_in, .relu_en, .res_en, .pool_en, .out_ch,
    .wr_en, .wr_row, .wr_grp, .wr_data, .wr_mask);

  always #5 clk = ~clk;

  function automatic int wrap13(input longint v);
    longint m = v & 64'h1FFF;
    return int'(m >= 4096 ? m - 8192 : m);
  endfunction

  function automatic int floor_div256(input longint v);
    return int'((v >= 0) ? v / 256 : -((-v + 255) / 256));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int mode = 0; mode < 8; mode++) begin
      relu_en = mode[0]; res_en = mode[1]; pool_en = mode[2];
      for (int p = 0; p < 40; p++) begin
        for (int g = 0; g < NGRP; g++) begin
          int e [OCL];
          @(negedge clk);
          valid = 1'b1; pos = 8'(p); grp = 3'(g); out_ch = 8'($urandom_range(1, 16));
          for (int o = 0; o < OCL; o++) begin
            int v;
            acc[o]    = acc_t'($urandom_range(0, 32'h3FFFF)) - acc_t'(32'h20000) ;
            if ($urandom_range(0, 9) == 0) acc[o] = acc_t'($urandom()); // exercise wrap-around
            bias[o]   = fx_t'($urandom_range(0, 8191));
            res_in[o] = fx_t'($urandom_range(0, 8191));
            v = wrap13(floor_div256(longint'(acc[o]) + longint'(bias[o]) * 256));
            if (relu_en && v < 0) v = 0;
            if (res_en) v = wrap13(v + int'(res_in[o]));
            e[o] = v;
          end
          #1;
          for (int o = 0; o < OCL; o++) chk(wr_mask[o] == ((g * OCL + o) < int'(out_ch)), "mask");
          chk(wr_grp == 3'(g), "grp");
          if (!pool_en) begin
            chk(wr_en == 1'b1 && wr_row == 6'(p), "row");
            for (int o = 0; o < OCL; o++) chk(int'(wr_data[o]) == e[o], "data");
          end else if (p % 2 == 0) begin
            chk(wr_en == 1'b0, "no write at even position");
            for (int o = 0; o < OCL; o++) held[g][o] = e[o];
          end else begin
            chk(wr_en == 1'b1 && wr_row == 6'(p / 2), "pooled row");
            for (int o = 0; o < OCL; o++)
              chk(int'(wr_data[o]) == (held[g][o] > e[o] ? held[g][o] : e[o]), "pooled data");
          end
          @(negedge clk);
          valid = 1'b0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
