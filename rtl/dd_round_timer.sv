// dd_round_timer: decides when DNN-Defender runs a protection round.
//
// A victim row must be refreshed before its aggressor reaches the RowHammer
// threshold T_RH; with one activation per T_ACT that gives a window of
// T_RH x T_ACT. The paper spaces rounds by T_n = T_ACT x T_RH + T_swap x N_s:
// one window of normal traffic, then the swaps of the round. This timer
// reproduces that schedule. When enable rises (and DD_Interrup is low) it
// pulses start at once; after each round it waits WINDOW = T_RH x T_ACT
// cycles and pulses start again. Raising dd_interrupt stops new rounds (the
// "else if DD_Interrup: break" branch of the paper's Algorithm 1); the swap
// engine itself stops a running round at the next swap boundary.
// The paper requires the swaps to finish inside the threshold window; a
// round still running WINDOW cycles after its start raises overrun for one
// cycle, so software can shrink the table.
//
// Interface: enable, dd_interrupt, round_done (pulse from the engine); start
// (pulse), overrun (pulse), waiting (level, between rounds).
// Timing: start is registered and comes one cycle after enable; the start
// pulse of the next round comes exactly WINDOW cycles after the round_done
// pulse.
module dd_round_timer
  import dd_pkg::*;
#(
  parameter int unsigned T_RH  = T_RH_DEF,
  parameter int unsigned T_ACT = T_ACT_DEF,
  localparam int unsigned WINDOW = T_RH * T_ACT,
  localparam int unsigned CNT_W  = $clog2(WINDOW + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,
  input  logic dd_interrupt,
  input  logic round_done,
  output logic start,
  output logic overrun,
  output logic waiting
);

  typedef enum logic [1:0] {T_OFF, T_RUN, T_WAIT} tstate_e;

  tstate_e          state;
  logic [CNT_W-1:0] cnt;

  wire allowed = enable && !dd_interrupt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= T_OFF;
      cnt     <= '0;
      start   <= 1'b0;
      overrun <= 1'b0;
    end else begin
      start   <= 1'b0;
      overrun <= 1'b0;
      unique case (state)
        T_OFF: if (allowed) begin
          start <= 1'b1;
          cnt   <= '0;
          state <= T_RUN;
        end
        T_RUN: begin
          if (round_done) begin
            cnt   <= CNT_W'(1);
            state <= allowed ? T_WAIT : T_OFF;
          end else begin
            if (cnt != CNT_W'(WINDOW)) cnt <= cnt + 1'b1;
            if (cnt == CNT_W'(WINDOW - 1)) overrun <= 1'b1;
          end
        end
        T_WAIT: begin
          if (!allowed) begin
            state <= T_OFF;
          end else if (cnt == CNT_W'(WINDOW - 1)) begin
            start <= 1'b1;
            cnt   <= '0;
            state <= T_RUN;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= T_OFF;
      endcase
    end
  end

  assign waiting = (state == T_WAIT);

endmodule
