// fold_fsm: folding controller of the modulo ADC loop.
//
// A four-state machine (KEEP, INCREASE, DECREASE, WAIT) reads the status word
// [B2 B1 B0] = [wait, OVRN, OVRP] once per 200 MHz cycle and keeps the signed
// fold-count register C_f, which drives the loop DAC. Transitions, as printed
// in the state diagram of the source paper:
//   KEEP     -- x01 --> DECREASE   (input above +lambda: C_f <- C_f - 1)
//   KEEP     -- x10 --> INCREASE   (input below -lambda: C_f <- C_f + 1)
//   KEEP     -- x00 / x11 --> KEEP
//   INCREASE -- xxx --> WAIT,  DECREASE -- xxx --> WAIT
//   WAIT     -- 1xx --> WAIT,  WAIT -- 0xx --> KEEP
// Timing: C_f changes on the same clock edge at which the machine enters
// INCREASE or DECREASE, so `cf` already holds the new value while the state
// register shows INCREASE/DECREASE; `cf_update` is high for that one cycle.
// A fold therefore takes at least three cycles (step, WAIT, KEEP) plus however
// long B2 holds the machine in WAIT.
// Design choices not in the paper: C_f saturates at the range the paper gives
// for a fold step of 2^q codes, [-2^(13-q), 2^(13-q)-1] (an update that would
// leave it is dropped and flagged on `cf_sat`), and reset clears C_f to 0 and
// the state to KEEP (synchronous, active low, as everywhere in this design).
module fold_fsm
  import modulo_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  fold_status_t           status,    // synchronised [B2 B1 B0]
  input  logic [Q_W-1:0]         q,         // fold step exponent (range check)
  output logic signed [CF_W-1:0] cf,        // fold count C_f
  output fold_state_e            state,
  output logic                   cf_update, // C_f changed on this cycle's entry edge
  output logic                   cf_sat     // an update was dropped at the range limit
);
  fold_state_e state_n;
  logic signed [CF_W-1:0] cf_n;
  logic upd_n, sat_n;

  always_comb begin
    state_n = state;
    cf_n    = cf;
    upd_n   = 1'b0;
    sat_n   = 1'b0;
    unique case (state)
      ST_KEEP: begin
        if (status.b1 == 1'b0 && status.b0 == 1'b1) begin
          state_n = ST_DECREASE;
          if (cf > cf_min(q)) begin
            cf_n  = cf - 1'b1;
            upd_n = 1'b1;
          end else begin
            sat_n = 1'b1;
          end
        end else if (status.b1 == 1'b1 && status.b0 == 1'b0) begin
          state_n = ST_INCREASE;
          if (cf < cf_max(q)) begin
            cf_n  = cf + 1'b1;
            upd_n = 1'b1;
          end else begin
            sat_n = 1'b1;
          end
        end
      end
      ST_INCREASE, ST_DECREASE: state_n = ST_WAIT;
      ST_WAIT: if (!status.b2) state_n = ST_KEEP;
      default: state_n = ST_KEEP;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_KEEP;
      cf        <= '0;
      cf_update <= 1'b0;
      cf_sat    <= 1'b0;
    end else begin
      state     <= state_n;
      cf        <= cf_n;
      cf_update <= upd_n;
      cf_sat    <= sat_n;
    end
  end

  // C_f moves by at most one per cycle, and only when entering a step state.
  a_step_only_on_entry: assert property (@(posedge clk) disable iff (!rst_n)
      (cf != $past(cf)) |-> ((state == ST_INCREASE || state == ST_DECREASE) && cf_update));
  a_step_follows_wait: assert property (@(posedge clk) disable iff (!rst_n)
      (state == ST_INCREASE || state == ST_DECREASE) |=> (state == ST_WAIT));
endmodule
