// mac_array: the multiply-accumulate array of the classifier.
//
// One step multiplies a KMAX x ICL input window x[k][i] by the weights
// w[o][k][i] of OCL output channels, sums the KMAX*ICL products of each output
// channel in an adder tree and adds the result to that channel's accumulator
// (cleared instead when first = 1). All OCL*KMAX*ICL multiplications
// (1536 by default) happen in the same cycle; products keep their full
// 16 fraction bits. acc is registered: it holds the sum including a step one
// clock after the step is presented. The multiplier count is chosen near the
// roughly 2 100 DSP slices the published implementation occupies; the lane
// split is this design's own.
module mac_array
  import aitrig_pkg::*;
#(
  parameter int OCL = OC_LANES,
  parameter int ICL = IC_LANES
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid,
  input  logic first,
  input  fx_t  x   [KMAX][ICL],
  input  fx_t  w   [OCL][KMAX][ICL],
  output acc_t acc [OCL]
);
  acc_t dot [OCL];

  always_comb begin
    for (int o = 0; o < OCL; o++) begin
      dot[o] = '0;
      for (int k = 0; k < KMAX; k++)
        for (int i = 0; i < ICL; i++)
          dot[o] += acc_t'(x[k][i]) * acc_t'(w[o][k][i]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int o = 0; o < OCL; o++) acc[o] <= '0;
    end else if (valid) begin
      for (int o = 0; o < OCL; o++) acc[o] <= (first ? acc_t'(0) : acc[o]) + dot[o];
    end
  end
endmodule
