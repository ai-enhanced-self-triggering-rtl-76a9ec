// prbs32: 32-bit pseudo-random stimulus source for keeping the classifier
// datapath busy during power characterisation.
//
// A Fibonacci linear-feedback shift register with the characteristic
// polynomial x^32 + x^22 + x^2 + x + 1 (the polynomial is the published one;
// the Fibonacci form and the seed are this design's choices). Each cycle with
// en = 1 the register shifts left by one and the new bit 0 is
// s[31] ^ s[21] ^ s[1] ^ s[0]. state shows the register; a new value appears
// one clock after en. Synchronous active-low reset loads SEED, which must be
// non-zero.
module prbs32 #(
  parameter logic [31:0] SEED = 32'h0000_0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] state
);
  logic fb;
  assign fb = state[31] ^ state[21] ^ state[1] ^ state[0];

  always_ff @(posedge clk) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= {state[30:0], fb};
  end

  property p_nonzero;
    @(posedge clk) disable iff (!rst_n) state != 32'd0;
  endproperty
  a_nonzero: assert property (p_nonzero);
endmodule
