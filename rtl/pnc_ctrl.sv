// pnc_ctrl: stage and row-group sequencer of the Pease no-copy NTT.
//
// A transform has L = log2(N) stages. In each stage the N/2 butterflies are
// independent, so B butterfly cores take them B at a time: one row group per
// cycle, RPS = N/(2B) groups per stage (the pipelined, unrolled inner loop of
// the paper, II = 1). A stage reads only the array the previous stage wrote,
// so before the next stage may read, the butterfly pipeline is drained:
// DRAIN_CYC cycles after the last issue its last result is written. The two
// arrays swap roles every stage (stage[0] selects the source) instead of
// copying the output back, which is the paper's no-copy optimisation.
//
// Interface: a one-cycle `start` while idle begins a transform; `busy` is high
// from the cycle after start until the cycle `done` pulses. `issue` marks the
// cycles whose `stage` / `group` outputs request a read.
// Timing: busy is high for exactly L * (RPS + DRAIN_CYC) cycles.
// The drain length and the state encoding are this design's own choices.
module pnc_ctrl #(
  parameter int unsigned N = 4096,
  parameter int unsigned B = 16,
  localparam int unsigned L   = $clog2(N),
  localparam int unsigned RPS = N / (2 * B),
  localparam int unsigned GW  = (RPS > 1) ? $clog2(RPS) : 1,
  localparam int unsigned SW  = $clog2(L + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          issue,
  output logic [SW-1:0] stage,
  output logic [GW-1:0] group
);

  import pnc_pkg::*;

  localparam int unsigned DW = $clog2(DRAIN_CYC + 1);

  ctrl_state_e   state;
  logic [DW-1:0] drain_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      stage     <= '0;
      group     <= '0;
      drain_cnt <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: begin
          if (start) begin
            state <= ST_ISSUE;
            stage <= '0;
            group <= '0;
          end
        end
        ST_ISSUE: begin
          if (group == GW'(RPS - 1)) begin
            group     <= '0;
            drain_cnt <= '0;
            state     <= ST_DRAIN;
          end else begin
            group <= group + 1'b1;
          end
        end
        ST_DRAIN: begin
          if (drain_cnt == DW'(DRAIN_CYC - 1)) begin
            if (stage == SW'(L - 1)) begin
              state <= ST_IDLE;
              done  <= 1'b1;
            end else begin
              stage <= stage + 1'b1;
              state <= ST_ISSUE;
            end
          end else begin
            drain_cnt <= drain_cnt + 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy  = (state != ST_IDLE);
  assign issue = (state == ST_ISSUE);

  a_stage_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    issue |-> (stage < SW'(L)));
  a_done_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> !busy);

endmodule
