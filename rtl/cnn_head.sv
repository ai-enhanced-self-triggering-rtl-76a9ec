// cnn_head: classification head and trigger decision.
//
// After start it reads the LEN rows (positions) of the last feature map, one
// row of CH channels per clock through row_addr/row (combinational read),
// summing each channel. The global average is sum >>> log2(LEN), truncated to
// ap_fixed<13,5>. A dense layer then forms logit = requant(sum_c avg[c]*w[c] +
// b << 8) with CH multipliers in one cycle. trigger is logit > threshold
// (signed). logit, trigger and a one-cycle done pulse appear LEN + 2 clocks
// after start. Average pooling and the 64 -> 1 dense layer follow the
// published network; the threshold compare stands for the chosen operating
// point, whose value depends on the trained weights and is therefore an input.
module cnn_head
  import aitrig_pkg::*;
#(
  parameter int LEN   = HEAD_LEN,
  parameter int CH    = HEAD_CH,
  parameter int SHIFT = HEAD_SHIFT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic [5:0] row_addr,
  input  fx_t        row [CH],
  input  fx_t        fc_w [CH],
  input  fx_t        fc_b,
  input  fx_t        threshold,
  output logic       done,
  output fx_t        logit,
  output logic       trigger
);
  typedef enum logic [1:0] {H_IDLE, H_ACC, H_DENSE} hstate_t;
  hstate_t st;
  acc_t sum [CH];
  fx_t  avg [CH];
  acc_t dot;

  always_comb begin
    dot = acc_t'(fc_b) <<< FW;
    for (int c = 0; c < CH; c++) begin
      acc_t a;
      a = sum[c] >>> SHIFT;
      avg[c] = a[DW-1:0];
      dot += acc_t'(avg[c]) * acc_t'(fc_w[c]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st       <= H_IDLE;
      row_addr <= '0;
      done     <= 1'b0;
      logit    <= '0;
      trigger  <= 1'b0;
      for (int c = 0; c < CH; c++) sum[c] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        H_IDLE: if (start) begin
          st       <= H_ACC;
          row_addr <= '0;
          for (int c = 0; c < CH; c++) sum[c] <= '0;
        end
        H_ACC: begin
          for (int c = 0; c < CH; c++) sum[c] <= sum[c] + acc_t'(row[c]);
          if (int'(row_addr) == LEN - 1) st <= H_DENSE;
          else row_addr <= row_addr + 1'b1;
        end
        H_DENSE: begin
          logit   <= requant(dot);
          trigger <= requant(dot) > threshold;
          done    <= 1'b1;
          st      <= H_IDLE;
        end
        default: st <= H_IDLE;
      endcase
    end
  end
endmodule
