// ssa_controller: sequencer of the SSA block.
//
// A run of T time steps (T = `num_steps`, sampled on `start` while idle) lasts T + 1 periods of
// D_K + 1 clock cycles each. Within a period, phases 0..D_K-1 are the streaming cycles (one
// column d_k of Q, K, V per cycle) and phase D_K is the gap cycle in which every SAU moves its
// count into its score register. Periods 0..T-1 accept input (`in_ready`); period T only drains
// the attention-value product of the last step, with the inputs forced to zero by the top.
// The attention-value product of step t runs in period t+1; the row encoders register their
// output, so `attn_valid` is high in the cycle after each streaming cycle of periods 1..T, with
// `attn_col` = d_k (0-based) and `attn_step` = t. `done` pulses for one cycle after the last
// output, and the controller returns to idle. A run takes (T + 1)(D_K + 1) + 1 cycles from the
// cycle after `start` to `done`.
//
// The period of D_K + 1 cycles and the overlap of consecutive steps follow the authors' dataflow
// figure; the start/done handshake, the drain period and the valid flags are this design's.
module ssa_controller
  import ssa_pkg::*;
#(
  parameter int unsigned DK = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [STEP_W-1:0]          num_steps,
  output sau_ctrl_t                  ctrl,
  output logic                       in_ready,
  output logic                       busy,
  output logic                       attn_valid,
  output logic [$clog2(DK)-1:0]      attn_col,
  output logic [STEP_W-1:0]          attn_step,
  output logic                       done
);

  localparam int unsigned PH_W = $clog2(DK + 1);
  localparam int unsigned COL_W = $clog2(DK);

  typedef enum logic [1:0] {IDLE, RUN, LAST} state_e;

  state_e            state;
  logic [PH_W-1:0]   phase;
  logic [STEP_W-1:0] period;
  logic [STEP_W-1:0] steps;
  logic              sv_cycle;

  assign busy          = (state != IDLE);
  assign ctrl.stream   = (state == RUN) && (phase < PH_W'(DK));
  assign ctrl.capture  = (state == RUN) && (phase == PH_W'(DK));
  assign in_ready      = ctrl.stream && (period < steps);
  // The attention-value product of step period-1 is on the row adders in this cycle.
  assign sv_cycle      = ctrl.stream && (period != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= IDLE;
      phase  <= '0;
      period <= '0;
      steps  <= '0;
    end else begin
      unique case (state)
        IDLE: if (start && num_steps != '0) begin
          state  <= RUN;
          steps  <= num_steps;
          phase  <= '0;
          period <= '0;
        end
        RUN: begin
          if (phase == PH_W'(DK)) begin
            phase <= '0;
            if (period == steps) state <= LAST;
            else                 period <= period + 1'b1;
          end else begin
            phase <= phase + 1'b1;
          end
        end
        LAST: state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  // Output flags, aligned with the registered row encoders.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      attn_valid <= 1'b0;
      attn_col   <= '0;
      attn_step  <= '0;
    end else begin
      attn_valid <= sv_cycle;
      attn_col   <= COL_W'(phase);
      attn_step  <= period - 1'b1;
    end
  end

  assign done = (state == LAST);

endmodule
