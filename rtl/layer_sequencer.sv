// layer_sequencer: schedules one classification of a trace.
//
// For each of the N_LAYERS convolutions in turn it issues one MAC step per
// clock, looping (outermost first) over conv positions 0..in_len-1, output
// channel groups of OCL and input channel chunks of ICL. iss_first marks the
// first chunk of a (position, group), iss_last the last one, after which the
// write-back stage stores that group one clock later. One idle drain cycle
// separates layers, so the next layer never reads a row before it is written.
// After the last layer it pulses head_start, waits for head_done; done
// is high in that same cycle (it also releases the trace). With the default lanes a
// trace takes 640 MAC steps + 7 drain cycles + the head (18 cycles).
// The layer-by-layer schedule is this design's own; the published core was
// generated by a high-level synthesis tool whose schedule is not described.
module layer_sequencer
  import aitrig_pkg::*;
#(
  parameter int OCL = OC_LANES,
  parameter int ICL = IC_LANES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       iss_valid,
  output logic [2:0] iss_layer,
  output logic [7:0] iss_pos,
  output logic [2:0] iss_grp,
  output logic [2:0] iss_chk,
  output logic       iss_first,
  output logic       iss_last,
  output logic       head_start,
  input  logic       head_done,
  output logic       done
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_HEAD, S_WAIT} sstate_t;
  sstate_t st;

  // constants of the current layer
  int unsigned c_len, c_ngrp, c_nchk;
  always_comb begin
    c_len = 1; c_ngrp = 1; c_nchk = 1;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (int'(iss_layer) == l) begin
        c_len  = unsigned'(int'(layer_shape(l).in_len));
        c_ngrp = unsigned'(n_grp(l, OCL));
        c_nchk = unsigned'(n_chk(l, ICL));
      end
    end
  end

  assign busy       = (st != S_IDLE);
  assign iss_valid  = (st == S_RUN);
  assign iss_first  = (iss_chk == 3'd0);
  assign iss_last   = (int'(iss_chk) == int'(c_nchk) - 1);
  assign head_start = (st == S_HEAD);
  assign done       = (st == S_WAIT) && head_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      iss_layer <= '0;
      iss_pos   <= '0;
      iss_grp   <= '0;
      iss_chk   <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          st        <= S_RUN;
          iss_layer <= '0;
          iss_pos   <= '0;
          iss_grp   <= '0;
          iss_chk   <= '0;
        end
        S_RUN: begin
          if (!iss_last) begin
            iss_chk <= iss_chk + 1'b1;
          end else begin
            iss_chk <= '0;
            if (int'(iss_grp) != int'(c_ngrp) - 1) begin
              iss_grp <= iss_grp + 1'b1;
            end else begin
              iss_grp <= '0;
              if (int'(iss_pos) != int'(c_len) - 1) begin
                iss_pos <= iss_pos + 1'b1;
              end else begin
                iss_pos <= '0;
                st      <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: begin
          if (int'(iss_layer) == N_LAYERS - 1) begin
            st <= S_HEAD;
          end else begin
            iss_layer <= iss_layer + 1'b1;
            st        <= S_RUN;
          end
        end
        S_HEAD: st <= S_WAIT;
        S_WAIT: if (head_done) begin
          iss_layer <= '0;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_no_issue_idle: assert property (@(posedge clk) disable iff (!rst_n) iss_valid |-> busy);
endmodule
