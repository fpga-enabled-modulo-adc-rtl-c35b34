// modulo_adc_top: FPGA digital loop controller of one modulo-ADC channel.
//
// The analog front end adds a feedback voltage v_f = 2*lambda*C_f to the input
// and a window comparator raises OVRP (above +lambda) or OVRN (below -lambda).
// This module closes the loop in the 200 MHz controller clock domain:
//   comparator flags -> flag_sync (2 flops) -> fold_fsm (C_f register)
//   C_f -> multibit_step (C_f * 2^q) -> undercomp_cal (+ (C_f-1)*dV, DAC reg)
//   -> loop DAC pins (offset binary)
// and, on the sampling side:
//   ADC word (captured every other cycle, 100 MSPS) -> drm (g~ = y^ - 2*lambda*C_f)
//   -> capture_buffer (burst of {y^, C_f, g~} words)
// wait_timer turns each C_f update into the wait flag B2 that holds the FSM
// in WAIT while the front end settles.
// Loop timing: a flag that rises before edge 0 reaches the FSM at edge 2,
// C_f steps at edge 2, the DAC code at edge 3; the fold reaches the analog
// summing node after the DAC's own latency. The ADC strobe `adc_strobe` is
// high on every other cycle; the ADC data bus is registered on the edge that
// ends a strobe cycle.
// Clocking: the source paper drives the controller and DAC with in-phase
// 200 MHz clocks and the ADC with a 100 MHz clock advanced by 60 degrees, all
// from one FPGA PLL. The PLL is outside this module; because the clocks are
// phase-locked, the ADC word is taken here in the 200 MHz domain with a
// divide-by-two strobe. Run-time settings (q, dV, 2*lambda, wait length,
// C_f alignment delay) are plain inputs, to be driven from a register bank or
// debug core; the paper says they are programmable but not how.
module modulo_adc_top
  import modulo_pkg::*;
#(
  parameter int unsigned CAP_DEPTH = 65536, // capture memory, samples
  parameter int unsigned CF_DEPTH  = 32     // C_f alignment delay line, cycles
) (
  input  logic                         clk,          // 200 MHz controller clock
  input  logic                         rst_n,
  // window comparator (asynchronous)
  input  logic                         ovrp_async,   // B0
  input  logic                         ovrn_async,   // B1
  // loop DAC
  output logic [DAC_W-1:0]             dac_data,     // offset binary, to the DAC pins
  output logic signed [DAC_W-1:0]      dac_code,     // same code, two's complement
  // sampling ADC
  output logic                         adc_strobe,   // 100 MSPS sample slot
  input  logic signed [ADC_W-1:0]      adc_data,     // two's complement y^[k]
  // run-time settings
  input  logic [Q_W-1:0]               q,            // fold step = 2^q DAC codes
  input  logic [CAL_W-1:0]             cal_step,     // dV in DAC codes (0 = off)
  input  logic [WAIT_W-1:0]            wait_cycles,  // WAIT dwell after a fold
  input  logic [TWOL_W-1:0]            two_lambda,   // 2*lambda in ADC codes
  input  logic [$clog2(CF_DEPTH)-1:0]  cf_delay,     // C_f-to-sample alignment
  // status
  output logic signed [CF_W-1:0]       cf,
  output fold_state_e                  state,
  output logic                         cf_update,
  output logic                         cf_sat,
  output logic                         cf_in_range,
  output logic                         dac_clipped,
  // recovered stream
  output logic                         g_valid,
  output logic signed [G_W-1:0]        g_tilde,
  output logic signed [ADC_W-1:0]      y_hat,
  output logic signed [CF_W-1:0]       cf_aligned,
  // capture memory
  input  logic                         cap_arm,
  output logic                         cap_busy,
  output logic                         cap_done,
  input  logic [$clog2(CAP_DEPTH)-1:0] cap_rd_addr,
  output logic [ADC_W+CF_W+G_W-1:0]    cap_rd_data   // {y^, C_f, g~}
);
  logic [1:0]   flags;
  fold_status_t status;
  logic         b2;
  logic signed [DAC_W+Q_MAX:0] raw_code;
  logic         adc_phase;
  logic         adc_valid;
  logic signed [ADC_W-1:0] adc_q;

  flag_sync #(.WIDTH(2), .STAGES(2)) u_sync (
    .clk, .rst_n, .d_async({ovrn_async, ovrp_async}), .q_sync(flags)
  );

  assign status = '{b2: b2, b1: flags[1], b0: flags[0]};

  fold_fsm u_fsm (
    .clk, .rst_n, .status, .q, .cf, .state, .cf_update, .cf_sat
  );

  wait_timer u_wait (
    .clk, .rst_n, .start(cf_update), .wait_cycles, .b2
  );

  multibit_step u_step (
    .cf, .q, .raw_code, .in_range(cf_in_range)
  );

  undercomp_cal u_cal (
    .clk, .rst_n, .cf, .raw_code, .cal_step, .dac_code, .clipped(dac_clipped)
  );

  assign dac_data = {~dac_code[DAC_W-1], dac_code[DAC_W-2:0]};

  // 100 MSPS sample slot: every other controller cycle.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      adc_phase <= 1'b0;
      adc_valid <= 1'b0;
      adc_q     <= '0;
    end else begin
      adc_phase <= ~adc_phase;
      adc_valid <= adc_phase;
      if (adc_phase) adc_q <= adc_data;
    end
  end
  assign adc_strobe = adc_phase;

  drm #(.CF_DEPTH(CF_DEPTH)) u_drm (
    .clk, .rst_n, .cf, .cf_delay, .two_lambda,
    .y_valid(adc_valid), .y_hat(adc_q),
    .g_valid, .g_tilde, .y_out(y_hat), .cf_out(cf_aligned)
  );

  capture_buffer #(.DEPTH(CAP_DEPTH), .W(ADC_W + CF_W + G_W)) u_cap (
    .clk, .rst_n, .arm(cap_arm), .in_valid(g_valid),
    .in_data({y_hat, cf_aligned, g_tilde}),
    .busy(cap_busy), .done(cap_done), .rd_addr(cap_rd_addr), .rd_data(cap_rd_data)
  );
endmodule
