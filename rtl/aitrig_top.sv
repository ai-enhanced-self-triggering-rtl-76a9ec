// aitrig_top: radio-only AI self-trigger for extensive air showers.
//
// The core classifies 128-sample radio traces (band-passed, normalised
// samples in ap_fixed<13,5>) with a small 1-D fully convolutional network
// and raises a first-level trigger when the network's logit exceeds a
// programmable threshold. Data path:
//   sample stream, SPC samples per clock (2 by default, enough for 250 MS/s
//   at 200 MHz), or the on-chip PRBS when prbs_mode = 1
//     -> trace_buffer (two banks of 128 samples, whole windows dropped when
//        both are busy)
//     -> layer_sequencer + mac_array + post_proc, stepping through the seven
//        convolutions with feature maps kept in three act_buffers (A, B, C)
//     -> cnn_head (global average, dense 64 -> 1, threshold).
// Weights and biases are written through the ld_* port before use (see
// weight_mem for the addressing). One trace takes 666 clocks with the
// default lanes (3.3 us at 200 MHz); result_valid pulses with logit,
// trigger and the number of the sample window the result belongs to.
// The network, its number format and the PRBS stimulus follow the published
// design; the single shared MAC array, the buffering, the trace framing and
// the load port are this design's choices.
//
// Pipeline of one MAC step: in the issue cycle the window is gathered from
// the source buffer (zero outside the trace: padding 1 for kernel 3), the
// weight word is read and the products are added into the accumulators; in
// the next cycle post_proc writes the finished group to the destination.
module aitrig_top
  import aitrig_pkg::*;
#(
  parameter int OCL = OC_LANES,
  parameter int ICL = IC_LANES,
  parameter int SPC = SAMPLES_PER_CLK
) (
  input  logic        clk,
  input  logic        rst_n,
  // samples
  input  logic        sample_valid,
  input  fx_t         sample [SPC],   // sample[0] is the earliest
  input  logic        prbs_mode,
  // parameter load port
  input  logic        ld_valid,
  input  ld_sel_t     ld_sel,
  input  logic [2:0]  ld_layer,
  input  logic [6:0]  ld_oc,
  input  logic [5:0]  ld_ic,
  input  logic [1:0]  ld_k,
  input  fx_t         ld_data,
  // operating point
  input  fx_t         threshold,
  // results
  output logic        result_valid,
  output logic        trigger,
  output fx_t         logit,
  output logic [31:0] result_trace_id,
  output logic        busy,
  output logic [31:0] traces_dropped,
  output logic [15:0] last_latency
);
  localparam int NW = n_words(OCL, ICL);

  // ---------------- sample source ----------------
  logic [31:0] prbs_state;
  logic        s_valid;
  fx_t         s_data [SPC];

  prbs32 u_prbs (.clk, .rst_n, .en(prbs_mode), .state(prbs_state));

  assign s_valid = prbs_mode ? 1'b1 : sample_valid;
  // PRBS: sample j takes LFSR bits starting at (13 * j) mod 20
  always_comb
    for (int j = 0; j < SPC; j++)
      s_data[j] = prbs_mode ? fx_t'(prbs_state >> ((DW * j) % (32 - DW + 1))) : sample[j];

  // ---------------- trace capture ----------------
  logic [6:0]  trc_addr [3];
  fx_t         trc_rd   [3];
  logic        trace_valid, seq_done;
  logic [31:0] trace_id;

  trace_buffer #(.LEN(TRACE_LEN), .SPC(SPC)) u_trace (
    .clk, .rst_n, .s_valid, .s_data,
    .rd_addr(trc_addr), .rd_data(trc_rd),
    .trace_valid, .trace_id, .release_trace(seq_done), .dropped(traces_dropped)
  );

  // ---------------- sequencer ----------------
  logic       iss_valid, iss_first, iss_last, head_start, head_done;
  logic [2:0] iss_layer, iss_grp, iss_chk;
  logic [7:0] iss_pos;

  layer_sequencer #(.OCL(OCL), .ICL(ICL)) u_seq (
    .clk, .rst_n, .start(trace_valid), .busy,
    .iss_valid, .iss_layer, .iss_pos, .iss_grp, .iss_chk, .iss_first, .iss_last,
    .head_start, .head_done, .done(seq_done)
  );

  layer_shape_t cur;
  logic [$clog2(NW)-1:0] rd_word;
  always_comb begin
    cur     = layer_shape(int'(iss_layer));
    rd_word = '0;
    for (int l = 0; l < N_LAYERS; l++)
      if (int'(iss_layer) == l)
        rd_word = $bits(rd_word)'(w_base(l, OCL, ICL) + int'(iss_grp) * n_chk(l, ICL) + int'(iss_chk));
  end

  // ---------------- parameters ----------------
  fx_t        wts  [OCL][KMAX][ICL];
  fx_t        bias [OCL];
  fx_t        fc_w [HEAD_CH];
  fx_t        fc_b;
  logic [2:0] pp_layer, pp_grp;
  logic [7:0] pp_pos;
  logic       pp_valid;

  weight_mem #(.OCL(OCL), .ICL(ICL), .NW(NW)) u_wmem (
    .clk, .ld_valid, .ld_sel, .ld_layer, .ld_oc, .ld_ic, .ld_k, .ld_data,
    .rd_word, .rd_w(wts), .bias_layer(pp_layer), .bias_grp(pp_grp), .rd_bias(bias),
    .fc_w, .fc_b
  );

  // ---------------- activation buffers A, B, C ----------------
  logic [5:0]     buf_addr [3][4];
  fx_t            buf_row  [3][4][MAX_CH];
  logic           wb_en;
  logic [5:0]     wb_row;
  logic [2:0]     wb_grp;
  fx_t            wb_data [OCL];
  logic [OCL-1:0] wb_mask;
  logic [5:0]     head_row;
  layer_shape_t   ppc;

  assign ppc = layer_shape(int'(pp_layer));

  for (genvar b = 0; b < 3; b++) begin : g_buf
    act_buffer #(.ROWS(BUF_ROWS), .CH(MAX_CH), .OCL(OCL), .NRD(4)) u_buf (
      .clk,
      .we(wb_en && (int'(ppc.dst) == b + 1)),
      .wr_row(wb_row), .wr_grp(wb_grp), .wr_data(wb_data), .wr_mask(wb_mask),
      .rd_addr(buf_addr[b]), .rd_row(buf_row[b])
    );
  end

  always_comb begin
    for (int b = 0; b < 3; b++) begin
      for (int k = 0; k < KMAX; k++) buf_addr[b][k] = 6'(int'(iss_pos) + k - 1);
      buf_addr[b][3] = pp_pos[5:0];
    end
    // the head reads the last feature map (buffer C) through port 1
    if (!iss_valid) buf_addr[2][1] = head_row;
    for (int k = 0; k < KMAX; k++) trc_addr[k] = 7'(int'(iss_pos) + k - 1);
  end

  // ---------------- window gather ----------------
  fx_t x [KMAX][ICL];
  always_comb begin
    for (int k = 0; k < KMAX; k++) begin
      for (int i = 0; i < ICL; i++) begin
        int tp, ch;
        logic ok;
        tp = int'(iss_pos) + k - 1;
        ch = int'(iss_chk) * ICL + i;
        ok = (cur.k3 || k == 1) && tp >= 0 && tp < int'(cur.in_len) && ch < int'(cur.in_ch);
        x[k][i] = '0;
        if (ok) begin
          unique case (cur.src)
            SRC_TRACE: x[k][i] = (ch == 0) ? trc_rd[k] : '0;
            BUF_A:     x[k][i] = buf_row[0][k][ch % MAX_CH];
            BUF_B:     x[k][i] = buf_row[1][k][ch % MAX_CH];
            BUF_C:     x[k][i] = buf_row[2][k][ch % MAX_CH];
          endcase
        end
      end
    end
  end

  // ---------------- MAC array ----------------
  acc_t acc [OCL];
  mac_array #(.OCL(OCL), .ICL(ICL)) u_mac (
    .clk, .rst_n, .valid(iss_valid), .first(iss_first), .x, .w(wts), .acc
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pp_valid <= 1'b0;
      pp_layer <= '0;
      pp_pos   <= '0;
      pp_grp   <= '0;
    end else begin
      pp_valid <= iss_valid && iss_last;
      if (iss_valid && iss_last) begin
        pp_layer <= iss_layer;
        pp_pos   <= iss_pos;
        pp_grp   <= iss_grp;
      end
    end
  end

  // ---------------- write-back ----------------
  fx_t res_in [OCL];
  always_comb begin
    for (int o = 0; o < OCL; o++) begin
      int ch;
      ch = int'(pp_grp) * OCL + o;
      res_in[o] = '0;
      if (ch < MAX_CH) begin
        unique case (ppc.rsrc)
          BUF_A:   res_in[o] = buf_row[0][3][ch];
          BUF_B:   res_in[o] = buf_row[1][3][ch];
          BUF_C:   res_in[o] = buf_row[2][3][ch];
          default: res_in[o] = '0;
        endcase
      end
    end
  end

  post_proc #(.OCL(OCL), .NGRP(ceil_div(MAX_CH, OCL))) u_post (
    .clk, .valid(pp_valid), .pos(pp_pos), .grp(pp_grp), .acc, .bias, .res_in,
    .relu_en(ppc.relu), .res_en(ppc.res), .pool_en(ppc.pool), .out_ch(ppc.out_ch),
    .wr_en(wb_en), .wr_row(wb_row), .wr_grp(wb_grp), .wr_data(wb_data), .wr_mask(wb_mask)
  );

  // ---------------- head ----------------
  fx_t head_feat [HEAD_CH];
  always_comb for (int c = 0; c < HEAD_CH; c++) head_feat[c] = buf_row[2][1][c];

  cnn_head u_head (
    .clk, .rst_n, .start(head_start), .row_addr(head_row), .row(head_feat),
    .fc_w, .fc_b, .threshold, .done(head_done), .logit, .trigger
  );

  // ---------------- status ----------------
  logic [15:0] lat_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lat_cnt         <= '0;
      last_latency    <= '0;
      result_valid    <= 1'b0;
      result_trace_id <= '0;
    end else begin
      result_valid <= 1'b0;
      if (busy) lat_cnt <= lat_cnt + 1'b1;
      if (seq_done) begin
        last_latency    <= lat_cnt + 1'b1;
        lat_cnt         <= '0;
        result_valid    <= 1'b1;
        result_trace_id <= trace_id;
      end
    end
  end
endmodule
