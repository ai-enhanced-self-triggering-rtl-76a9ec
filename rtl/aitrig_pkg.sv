// aitrig_pkg: shared types, sizes and the layer table of the air-shower
// self-trigger classifier.
//
// Numbers: every activation, weight and bias is ap_fixed<13,5>, i.e. a 13-bit
// two's-complement value with 5 integer bits (sign included) and 8 fraction
// bits. Products carry 16 fraction bits and are accumulated in ACCW bits;
// requantisation truncates toward minus infinity and wraps, which is how an
// ap_fixed<13,5> behaves by default.
//
// Network (inference form, batch norm folded into the preceding convolution,
// dropout removed), 128 samples x 1 channel in:
//   L0  conv k3  1->16  ReLU, maxpool 2          128 -> 64 positions
//   L1  conv k3 16->32  ReLU                  (z)  64
//   L2  conv k3 32->RES_MID ReLU               F(z) first conv
//   L3  conv k3 RES_MID->32 ReLU, + z, maxpool 2    64 -> 32
//   L4  conv k1 32->B3_MID ReLU                bottleneck
//   L5  conv k3 B3_MID->B3_MID ReLU
//   L6  conv k1 B3_MID->64 (BN only), maxpool 2     32 -> 16
//   head: global average over 16 positions, dense 64->1 -> logit.
// Layer shapes, kernel sizes, the residual and bottleneck structure and the
// number format follow the published model; RES_MID, B3_MID, the residual
// kernel size and the lane counts of the MAC array are this design's choices.
package aitrig_pkg;

  localparam int DW        = 13;         // total bits of ap_fixed<13,5>
  localparam int IW        = 5;          // integer bits
  localparam int FW        = DW - IW;    // fraction bits (8)
  localparam int ACCW      = 32;         // accumulator width
  localparam int TRACE_LEN = 128;        // samples per trace
  localparam int SAMPLES_PER_CLK = 2;    // 250 MS/s into a 200 MHz core
  localparam int N_LAYERS  = 7;          // convolutions
  localparam int KMAX      = 3;          // largest kernel
  localparam int MAX_CH    = 64;         // widest feature map
  localparam int BUF_ROWS  = 64;         // rows of an activation buffer
  localparam int HEAD_LEN  = 16;         // positions left after three pools
  localparam int HEAD_CH   = 64;         // features into the dense layer
  localparam int HEAD_SHIFT = 4;         // log2(HEAD_LEN)
  localparam int RES_MID   = 16;         // residual branch width
  localparam int B3_MID    = 32;         // bottleneck width
  localparam int OC_LANES  = 32;         // output channels per MAC step
  localparam int IC_LANES  = 16;         // input channels per MAC step

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Where a layer reads from / writes to.
  typedef enum logic [1:0] {SRC_TRACE = 2'd0, BUF_A = 2'd1, BUF_B = 2'd2, BUF_C = 2'd3} buf_sel_t;

  // Kind of entry on the weight load port.
  typedef enum logic [1:0] {LD_CONV_W = 2'd0, LD_CONV_B = 2'd1, LD_FC_W = 2'd2, LD_FC_B = 2'd3} ld_sel_t;

  typedef struct packed {
    logic [7:0] in_len;    // positions read (= positions computed, stride 1, same padding)
    logic [7:0] in_ch;
    logic [7:0] out_ch;
    logic       k3;        // 1: kernel 3, padding 1; 0: kernel 1
    logic       relu;
    logic       pool;      // max-pool by 2 after the layer
    logic       res;       // add the residual input before pooling
    buf_sel_t   src;
    buf_sel_t   dst;
    buf_sel_t   rsrc;      // residual source
  } layer_shape_t;

  function automatic layer_shape_t layer_shape(input int l);
    layer_shape_t s;
    case (l)
      0:       s = '{8'd128, 8'd1,       8'd16,      1'b1, 1'b1, 1'b1, 1'b0, SRC_TRACE, BUF_B, BUF_A};
      1:       s = '{8'd64,  8'd16,      8'd32,      1'b1, 1'b1, 1'b0, 1'b0, BUF_B,     BUF_A, BUF_A};
      2:       s = '{8'd64,  8'd32,      8'(RES_MID), 1'b1, 1'b1, 1'b0, 1'b0, BUF_A,     BUF_B, BUF_A};
      3:       s = '{8'd64,  8'(RES_MID), 8'd32,      1'b1, 1'b1, 1'b1, 1'b1, BUF_B,     BUF_C, BUF_A};
      4:       s = '{8'd32,  8'd32,      8'(B3_MID), 1'b0, 1'b1, 1'b0, 1'b0, BUF_C,     BUF_A, BUF_A};
      5:       s = '{8'd32,  8'(B3_MID), 8'(B3_MID), 1'b1, 1'b1, 1'b0, 1'b0, BUF_A,     BUF_B, BUF_A};
      default: s = '{8'd32,  8'(B3_MID), 8'd64,      1'b0, 1'b0, 1'b1, 1'b0, BUF_B,     BUF_C, BUF_A};
    endcase
    return s;
  endfunction

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Output-channel groups and input-channel chunks of a layer.
  function automatic int n_grp(input int l, input int ocl);
    return ceil_div(int'(layer_shape(l).out_ch), ocl);
  endfunction
  function automatic int n_chk(input int l, input int icl);
    return ceil_div(int'(layer_shape(l).in_ch), icl);
  endfunction

  // First weight word of a layer; word = base + grp * n_chk + chk.
  function automatic int w_base(input int l, input int ocl, input int icl);
    int b = 0;
    for (int i = 0; i < l; i++) b += n_grp(i, ocl) * n_chk(i, icl);
    return b;
  endfunction

  function automatic int n_words(input int ocl, input int icl);
    return w_base(N_LAYERS, ocl, icl);
  endfunction

  // acc (2*FW fraction bits) -> ap_fixed<13,5>: truncate, then wrap.
  function automatic fx_t requant(input acc_t a);
    acc_t s = a >>> FW;
    return s[DW-1:0];
  endfunction

endpackage
