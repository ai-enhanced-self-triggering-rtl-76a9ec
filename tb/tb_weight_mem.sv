// tb_weight_mem: loads every convolution weight, bias and dense weight with
// random values through the logical load port and reads them back through the
// wide MAC-step port. The expected word and lane of each weight come from
// the word table of the default lane split (32 output x 16 input channels),
// written out here by hand: words per layer 1,1,2,1,2,2,4, first words
// 0,1,2,4,5,7,9; kernel-1 layers sit in the centre tap.
module tb_weight_mem;
  import aitrig_pkg::*;
  localparam int OCL = 32, ICL = 16, NW = 13;
  localparam int IN_CH  [7] = '{1, 16, 32, 16, 32, 32, 32};
  localparam int OUT_CH [7] = '{16, 32, 16, 32, 32, 32, 64};
  localparam int KS     [7] = '{3, 3, 3, 3, 1, 3, 1};
  localparam int BASE   [7] = '{0, 1, 2, 4, 5, 7, 9};
  localparam int NCHK   [7] = '{1, 1, 2, 1, 2, 2, 2};

  logic clk = 1'b0, ld_valid = 1'b0;
  ld_sel_t ld_sel;
  logic [2:0] ld_layer, bias_layer, bias_grp;
  logic [6:0] ld_oc;
  logic [5:0] ld_ic;
  logic [1:0] ld_k;
  fx_t ld_data;
  logic [3:0] rd_word;
  fx_t rd_w [OCL][KMAX][ICL];
  fx_t rd_bias [OCL];
  fx_t fc_w [HEAD_CH];
  fx_t fc_b;
  int W [7][64][32][3];
  int B [7][64];
  int FCW [64];
  int FCB;
  int checks = 0, failures = 0;

  weight_mem #(.OCL(OCL), .ICL(ICL), .NW(NW)) dut (
    .clk, .ld_valid, .ld_sel, .ld_layer, .ld_oc, .ld_ic, .ld_k, .ld_data,
    .rd_word, .rd_w, .bias_layer, .bias_grp, .rd_bias, .fc_w, .fc_b);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input ld_sel_t s, input int l, input int oc, input int ic, input int k, input int v);
    @(negedge clk);
    ld_valid = 1'b1; ld_sel = s; ld_layer = 3'(l); ld_oc = 7'(oc); ld_ic = 6'(ic); ld_k = 2'(k);
    ld_data = fx_t'(v);
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %0d vs %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int l = 0; l < 7; l++)
      for (int o = 0; o < OUT_CH[l]; o++) begin
        for (int i = 0; i < IN_CH[l]; i++)
          for (int k = 0; k < KS[l]; k++) begin
            W[l][o][i][k] = $urandom_range(0, 8191) - 4096;
            load(LD_CONV_W, l, o, i, k, W[l][o][i][k]);
          end
        B[l][o] = $urandom_range(0, 8191) - 4096;
        load(LD_CONV_B, l, o, 0, 0, B[l][o]);
      end
    for (int c = 0; c < 64; c++) begin
      FCW[c] = $urandom_range(0, 8191) - 4096;
      load(LD_FC_W, 0, c, 0, 0, FCW[c]);
    end
    FCB = -77;
    load(LD_FC_B, 0, 0, 0, 0, FCB);

    for (int l = 0; l < 7; l++)
      for (int o = 0; o < OUT_CH[l]; o++)
        for (int i = 0; i < IN_CH[l]; i++)
          for (int k = 0; k < KS[l]; k++) begin
            rd_word = 4'(BASE[l] + (o / OCL) * NCHK[l] + i / ICL);
            #1;
            expect_eq(int'(rd_w[o % OCL][KS[l] == 1 ? 1 : k][i % ICL]), W[l][o][i][k], "conv weight");
          end
    for (int l = 0; l < 7; l++)
      for (int g = 0; g * OCL < OUT_CH[l]; g++) begin
        bias_layer = 3'(l); bias_grp = 3'(g);
        #1;
        for (int o = 0; o < OCL && g * OCL + o < OUT_CH[l]; o++)
          expect_eq(int'(rd_bias[o]), B[l][g * OCL + o], "bias");
      end
    for (int c = 0; c < 64; c++) expect_eq(int'(fc_w[c]), FCW[c], "fc weight");
    expect_eq(int'(fc_b), FCB, "fc bias");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
