// modulo_pkg: widths, the folding-controller state type and the comparator
// status word shared by the digital loop controller of the FPGA modulo ADC.
//
// Word widths follow the converters on the board: a 14-bit loop DAC whose
// top bit carries the sign (so one fold step of 2^q codes leaves a fold count
// range of [-2^(13-q), 2^(13-q)-1]) and an 8-bit sampling ADC. The other
// widths (fold count, calibration step, 2*lambda, recovered sample) are this
// design's own choices, sized so nothing overflows at the extreme settings.
package modulo_pkg;

  // Loop DAC: 14 bits, two's complement inside the FPGA (1 sign bit).
  localparam int unsigned DAC_W = 14;
  // Fold count C_f: at q = 0 it spans the whole DAC code range.
  localparam int unsigned CF_W = DAC_W;
  // Fold step exponent q: 0..13.
  localparam int unsigned Q_W = 4;
  localparam int unsigned Q_MAX = DAC_W - 1;
  // Sampling ADC (8 bits, two's complement samples y^[k]).
  localparam int unsigned ADC_W = 8;
  // Calibration step dV, in DAC codes (unsigned).
  localparam int unsigned CAL_W = 10;
  // 2*lambda in ADC codes (unsigned, 50 for lambda = 0.1 V).
  localparam int unsigned TWOL_W = 9;
  // Recovered sample g~[k] = y^[k] - 2*lambda*C_f; |2*lambda*C_f| < 2^(TWOL_W+CF_W-1).
  localparam int unsigned G_W = TWOL_W + CF_W + 1;
  // WAIT dwell (B2 high time) in controller cycles.
  localparam int unsigned WAIT_W = 8;

  // Folding-controller states (Fig. 3 of the source paper).
  typedef enum logic [1:0] {
    ST_KEEP     = 2'd0,
    ST_INCREASE = 2'd1,
    ST_DECREASE = 2'd2,
    ST_WAIT     = 2'd3
  } fold_state_e;

  // Status flags [B2 B1 B0] = [wait, OVRN, OVRP].
  typedef struct packed {
    logic b2;  // wait flag: 1 while the front end is still settling
    logic b1;  // OVRN: input below -lambda
    logic b0;  // OVRP: input above +lambda
  } fold_status_t;

  // Largest and smallest admissible fold count for a step of 2^q codes.
  function automatic logic signed [CF_W-1:0] cf_max(input logic [Q_W-1:0] q);
    logic [Q_W-1:0] qq;
    qq = (q > Q_MAX[Q_W-1:0]) ? Q_MAX[Q_W-1:0] : q;
    return CF_W'((1 << (Q_MAX - int'(qq))) - 1);
  endfunction

  function automatic logic signed [CF_W-1:0] cf_min(input logic [Q_W-1:0] q);
    logic [Q_W-1:0] qq;
    qq = (q > Q_MAX[Q_W-1:0]) ? Q_MAX[Q_W-1:0] : q;
    return -CF_W'(1 << (Q_MAX - int'(qq)));
  endfunction

endpackage
