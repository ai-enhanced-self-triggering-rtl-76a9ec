// trace_buffer: cuts the sample stream into 128-sample traces for the
// classifier and keeps one trace while the next is being captured.
//
// The stream is divided into consecutive, non-overlapping windows of LEN
// samples, numbered from 0 after reset. Two banks alternate: the writer fills
// one bank while the engine reads the other. When a window completes, its
// bank becomes full and the writer moves to the other bank if that bank is
// free. If no bank is free at the start of a window, that whole window is
// skipped and counted in dropped, so a trace is always LEN contiguous
// samples. trace_valid says the oldest full bank is ready; trace_id is its
// window number; rd_addr/rd_data read it combinationally; a release pulse
// frees it (one clock later). Samples arrive SPC per clock (s_data[0] is the
// earliest), so a 250 MS/s digitiser can feed a 200 MHz core with SPC = 2;
// LEN must be a multiple of SPC. The double-buffering, the drop policy and
// the input width are this design's choices; the published work fixes only
// the trace length (128 samples), the 250 MHz sampling and the 200 MHz clock.
module trace_buffer
  import aitrig_pkg::*;
#(
  parameter int LEN = TRACE_LEN,
  parameter int SPC = SAMPLES_PER_CLK,
  parameter int NRD = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    s_valid,
  input  fx_t                     s_data [SPC],
  input  logic [$clog2(LEN)-1:0]  rd_addr [NRD],
  output fx_t                     rd_data [NRD],
  output logic                    trace_valid,
  output logic [31:0]             trace_id,
  input  logic                    release_trace,
  output logic [31:0]             dropped
);
  localparam int AW = $clog2(LEN);

  fx_t               mem [2][LEN];
  logic [1:0]        full;
  logic [31:0]       bank_id [2];
  logic              wb;          // bank being written
  logic              rb;          // bank being read
  logic              skipping;    // current window is being dropped
  logic [AW-1:0]     wptr;
  logic [31:0]       win;         // number of the current window

  logic [1:0] full_rel;
  logic       win_end;
  assign full_rel = release_trace ? (full & ~(2'b01 << rb)) : full;
  assign win_end  = s_valid && (wptr == AW'(LEN - SPC));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full     <= '0;
      wb       <= 1'b0;
      rb       <= 1'b0;
      skipping <= 1'b0;
      wptr     <= '0;
      win      <= '0;
      dropped  <= '0;
      bank_id[0] <= '0;
      bank_id[1] <= '0;
    end else begin
      logic [1:0] f;
      f = full_rel;
      if (release_trace) rb <= ~rb;
      if (s_valid) begin
        if (!skipping)
          for (int j = 0; j < SPC; j++) mem[wb][wptr + AW'(j)] <= s_data[j];
        wptr <= win_end ? '0 : wptr + AW'(SPC);
      end
      if (win_end) begin
        win <= win + 1;
        if (skipping) begin
          dropped <= dropped + 1;
        end else begin
          f[wb] = 1'b1;
          bank_id[wb] <= win;
        end
        // next window: the other bank if free, else this one, else skip it
        if (!f[~wb]) begin
          wb       <= ~wb;
          skipping <= 1'b0;
        end else if (!f[wb]) begin
          skipping <= 1'b0;
        end else begin
          skipping <= 1'b1;
        end
      end
      full <= f;
    end
  end

  assign trace_valid = full[rb];
  assign trace_id    = bank_id[rb];

  always_comb begin
    for (int p = 0; p < NRD; p++) rd_data[p] = mem[rb][rd_addr[p]];
  end

  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) release_trace |-> full[rb]);
endmodule
