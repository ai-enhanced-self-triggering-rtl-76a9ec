// weight_mem: parameter store of the classifier.
//
// Holds the convolution weights (batch normalisation folded in), one bias per
// output channel and layer, and the 64 weights and the bias of the dense
// output layer, all ap_fixed<13,5>. The trained values are not part of the
// design, so they are written at run time through a logical load port: for
// ld_sel = LD_CONV_W the entry is weight (ld_oc, ld_ic, ld_k) of layer
// ld_layer, with ld_k counting the kernel taps from the earliest sample
// (0..2 for kernel 3, 0 for kernel 1). The memory stores convolution weights
// as wide words, one per MAC step: word w_base(layer) + grp*n_chk + chk
// holds OCL x KMAX x ICL values, lane (o, tap, i) belonging to output channel
// grp*OCL+o and input channel chk*ICL+i. Kernel-1 layers use the centre tap.
// Unused lanes are never multiplied by anything but zero inputs. Writes take
// effect at the clock edge; reads are combinational. No reset: weights must
// be loaded before the first trace.
module weight_mem
  import aitrig_pkg::*;
#(
  parameter int OCL = OC_LANES,
  parameter int ICL = IC_LANES,
  parameter int NW  = n_words(OC_LANES, IC_LANES)
) (
  input  logic       clk,
  // load port
  input  logic       ld_valid,
  input  ld_sel_t    ld_sel,
  input  logic [2:0] ld_layer,
  input  logic [6:0] ld_oc,
  input  logic [5:0] ld_ic,
  input  logic [1:0] ld_k,
  input  fx_t        ld_data,
  // MAC-step read
  input  logic [$clog2(NW)-1:0] rd_word,
  output fx_t        rd_w [OCL][KMAX][ICL],
  // bias of the group being written back
  input  logic [2:0] bias_layer,
  input  logic [2:0] bias_grp,
  output fx_t        rd_bias [OCL],
  // dense layer
  output fx_t        fc_w [HEAD_CH],
  output fx_t        fc_b
);
  fx_t wmem [NW][OCL][KMAX][ICL];
  fx_t bias [N_LAYERS][MAX_CH];

  // load address decode, per-layer constants selected by ld_layer
  int unsigned ld_word, ld_tap;
  always_comb begin
    ld_word = 0;
    ld_tap  = 1;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (int'(ld_layer) == l) begin
        ld_word = unsigned'(w_base(l, OCL, ICL) + (int'(ld_oc) / OCL) * n_chk(l, ICL) + int'(ld_ic) / ICL);
        ld_tap  = layer_shape(l).k3 ? unsigned'(int'(ld_k)) : 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid) begin
      unique case (ld_sel)
        LD_CONV_W: if (ld_word < NW && ld_tap < KMAX)
                     wmem[ld_word][int'(ld_oc) % OCL][ld_tap][int'(ld_ic) % ICL] <= ld_data;
        LD_CONV_B: if (int'(ld_oc) < MAX_CH && int'(ld_layer) < N_LAYERS)
                     bias[ld_layer][ld_oc[$clog2(MAX_CH)-1:0]] <= ld_data;
        LD_FC_W:   if (int'(ld_oc) < HEAD_CH) fc_w[ld_oc[$clog2(HEAD_CH)-1:0]] <= ld_data;
        LD_FC_B:   fc_b <= ld_data;
      endcase
    end
  end

  always_comb begin
    rd_w = wmem[rd_word];
    for (int o = 0; o < OCL; o++) begin
      if ((int'(bias_grp) * OCL + o) < MAX_CH && int'(bias_layer) < N_LAYERS)
        rd_bias[o] = bias[bias_layer][int'(bias_grp) * OCL + o];
      else
        rd_bias[o] = '0;
    end
  end
endmodule
