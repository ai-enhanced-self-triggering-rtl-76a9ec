// post_proc: write-back stage after the MAC array.
//
// For a finished group of OCL output channels at conv position pos it forms
// requant(acc + bias << 8), i.e. truncation to ap_fixed<13,5> with wrap-around,
// applies ReLU when relu_en, adds the residual input res_in when res_en (a
// 13-bit wrapping add, no activation afterwards), and then either writes the
// values to row pos (pool_en = 0) or max-pools pairs of positions: at an even
// position the values are held per group, at the following odd position the
// larger of the two is written to row pos/2. wr_mask enables the lanes whose
// channel is below out_ch. The outputs are combinational from valid; the hold
// registers change at the clock edge. The order bias, ReLU, residual add,
// pool follows the published block structure; the truncating requantisation
// is the default behaviour of the ap_fixed<13,5> format.
module post_proc
  import aitrig_pkg::*;
#(
  parameter int OCL  = OC_LANES,
  parameter int NGRP = MAX_CH / OC_LANES
) (
  input  logic        clk,
  input  logic        valid,
  input  logic [7:0]  pos,
  input  logic [2:0]  grp,
  input  acc_t        acc     [OCL],
  input  fx_t         bias    [OCL],
  input  fx_t         res_in  [OCL],
  input  logic        relu_en,
  input  logic        res_en,
  input  logic        pool_en,
  input  logic [7:0]  out_ch,
  output logic        wr_en,
  output logic [5:0]  wr_row,
  output logic [2:0]  wr_grp,
  output fx_t         wr_data [OCL],
  output logic [OCL-1:0] wr_mask
);
  fx_t hold [NGRP][OCL];
  fx_t v    [OCL];

  always_comb begin
    for (int o = 0; o < OCL; o++) begin
      fx_t q;
      q = requant(acc[o] + (acc_t'(bias[o]) <<< FW));
      if (relu_en && q < 0) q = '0;
      if (res_en) q = q + res_in[o];
      v[o] = q;
      wr_mask[o] = (int'(grp) * OCL + o) < int'(out_ch);
    end
  end

  logic [$clog2(NGRP > 1 ? NGRP : 2)-1:0] gi;
  assign gi = grp[$bits(gi)-1:0];

  always_comb begin
    wr_grp = grp;
    if (pool_en) begin
      wr_en  = valid && pos[0];
      wr_row = pos[6:1];
      for (int o = 0; o < OCL; o++) wr_data[o] = (hold[gi][o] > v[o]) ? hold[gi][o] : v[o];
    end else begin
      wr_en  = valid;
      wr_row = pos[5:0];
      wr_data = v;
    end
  end

  always_ff @(posedge clk) begin
    if (valid && pool_en && !pos[0]) hold[gi] <= v;
  end
endmodule
