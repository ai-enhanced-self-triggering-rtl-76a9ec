// act_buffer: on-chip feature-map memory between convolution layers.
//
// ROWS positions x CH channels of ap_fixed<13,5>. One write per clock stores
// OCL consecutive channels (group wr_grp, channels wr_grp*OCL ...) of row
// wr_row, each lane enabled by wr_mask. Four read ports return whole rows
// combinationally (asynchronous read, so a value written at a clock edge is
// visible in the next cycle): ports 0..2 serve the three taps of the
// convolution window, port 3 the residual input. The organisation is this
// design's choice; the published work only reports that block-RAM use is low.
// There is no reset; the sequencer never reads a row before writing it.
module act_buffer
  import aitrig_pkg::*;
#(
  parameter int ROWS = BUF_ROWS,
  parameter int CH   = MAX_CH,
  parameter int OCL  = OC_LANES,
  parameter int NRD  = 4
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  logic [2:0]               wr_grp,
  input  fx_t                      wr_data [OCL],
  input  logic [OCL-1:0]           wr_mask,
  input  logic [$clog2(ROWS)-1:0]  rd_addr [NRD],
  output fx_t                      rd_row  [NRD][CH]
);
  fx_t mem [ROWS][CH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < OCL; i++) begin
        if (wr_mask[i] && (int'(wr_grp) * OCL + i) < CH)
          mem[wr_row][int'(wr_grp) * OCL + i] <= wr_data[i];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NRD; p++)
      for (int c = 0; c < CH; c++)
        rd_row[p][c] = mem[rd_addr[p]][c];
  end
endmodule
