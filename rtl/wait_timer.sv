// wait_timer: generator of the wait flag B2 of the folding controller.
//
// The source paper names B2 as the flag that marks settling of the analog
// front end and keeps the folding FSM in WAIT while it is high, but does not
// say where it comes from. This design derives it from a timer: every C_f
// update (`start`, high for one cycle) loads `wait_cycles`, the timer counts
// down once per clock, and B2 is high while the count is not zero. `start` is
// the one-cycle cf_update pulse of the FSM (high while it is in INCREASE or
// DECREASE); the count loads on the edge that moves the FSM into WAIT, so with
// wait_cycles = N the FSM spends max(1, N) cycles in WAIT after each step. A start during a
// running count reloads it. wait_cycles = 0 leaves B2 low (minimum dwell).
module wait_timer
  import modulo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [WAIT_W-1:0] wait_cycles,
  output logic              b2
);
  logic [WAIT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n)              cnt <= '0;
    else if (start)          cnt <= wait_cycles;
    else if (cnt != '0)      cnt <= cnt - 1'b1;
  end

  assign b2 = (cnt != '0);
endmodule
