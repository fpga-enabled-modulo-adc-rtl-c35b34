// tb_modulo_adc_top: closed-loop, end-to-end testbench of the modulo-ADC
// loop controller at its default sizes (65536-word capture memory, 32-cycle
// C_f alignment line), with the analog side modelled by afe_model.
//
// Scenarios (input sizes from the measurements reported for the design):
//  R. on-board direct recovery record: q = 7, lambda = 0.1 V (25 ADC codes),
//     rho = 91.56, one sine period spread over 50,000 samples at 100 MSPS
//     (2 kHz); a capture burst is armed at the start of the period and all
//     65536 stored words are read back; the recovered peak must be
//     91.56 * 25 = 2289 codes (minus the calibration offset), within 3 codes.
//  A. q = 7, lambda = 0.1 V, 1 kHz sine with rho = 102 (10.2 V peak), one full
//     period (1 ms); needs |C_f| up to 51 of the 63/64 that q = 7 allows.
//     Under-compensation on: analog step 2*lambda - dV, digital dV = 16 codes.
//  B. mode switch to q = 9 (one fold = 512 codes): 100 kHz sine, rho = 2.84.
//  C. still q = 9 (C_f limited to [-16, 15]): 10 kHz sine with rho = 40,
//     which needs 20 folds, so the fold count saturates.
// Checks:
//  * every recovered sample taken with settled feedback equals the quantised
//    input minus the constant calibration offset dV (within 1 code);
//  * every DAC code equals C_f * 2^q + (C_f - 1) * dV of the C_f one cycle
//    earlier;
//  * a C_f step follows the comparator flag by exactly two clock edges
//    (flag present at edge 0, step at edge 2) when the FSM is in KEEP;
//  * the folded output stays within +/-(lambda + 60 mV) except in scenario C;
//  * the capture memory holds the same {y^, C_f, g~} words the DRM produced;
//  * each mechanism happened: INCREASE, DECREASE, WAIT dwell (B2), saturation,
//    the q mode switch, calibration, direct recovery and a capture burst.
// The loop delay (OVRP high time, the paper's T_F) is measured and printed.
module tb_modulo_adc_top;
  import modulo_pkg::*;

  localparam real LAMBDA = 0.1;
  localparam int  ADC_LAT = 5;
  localparam real PI = 3.14159265358979;
  localparam real TCLK = 5.0e-9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ovrp_async, ovrn_async;
  logic [DAC_W-1:0] dac_data;
  logic signed [DAC_W-1:0] dac_code;
  logic adc_strobe;
  logic signed [ADC_W-1:0] adc_data;
  logic [Q_W-1:0] q = 4'd7;
  logic [CAL_W-1:0] cal_step = 10'd16;
  logic [WAIT_W-1:0] wait_cycles = 8'd6;
  logic [TWOL_W-1:0] two_lambda = 9'd50;
  logic [4:0] cf_delay = 5'(2 * ADC_LAT + 3);
  logic signed [CF_W-1:0] cf;
  fold_state_e state;
  logic cf_update, cf_sat, cf_in_range, dac_clipped;
  logic g_valid;
  logic signed [G_W-1:0] g_tilde;
  logic signed [ADC_W-1:0] y_hat;
  logic signed [CF_W-1:0] cf_aligned;
  logic cap_arm = 1'b0, cap_busy, cap_done;
  logic [15:0] cap_rd_addr = '0;
  logic [ADC_W+CF_W+G_W-1:0] cap_rd_data;

  real g_in = 0.0, vpc, adc_g_true, y_out, v_fb;
  logic adc_settled;

  modulo_adc_top dut (.*);

  afe_model #(.LAMBDA(LAMBDA), .ADC_LAT(ADC_LAT)) u_afe (
    .clk, .g_in, .volts_per_code(vpc), .dac_data, .adc_strobe,
    .ovrp(ovrp_async), .ovrn(ovrn_async), .adc_data, .adc_g_true, .adc_settled,
    .y_out, .v_fb
  );

  always #2.5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_inc = 0, n_dec = 0, n_wait_dwell = 0, n_sat = 0, n_qswitch = 0, n_cal = 0;
  int n_drm_ok = 0, n_cap = 0, n_lat = 0, n_range = 0;
  int tf_min = 1000, tf_max = 0, tf_cnt = 0;
  bit scen_c = 0;
  real dv_volts;

  // fold-path gain: an analog step of 2^q codes plus dV codes is 2*lambda
  function automatic real gain_for(int qq, int d);
    return 2.0 * LAMBDA / real'((1 << qq) + d);
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t: %s", $time, msg);
  endtask

  initial begin
    #20ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- scoring of the recovered stream ----
  real  tq_g[$];
  logic tq_s[$];
  logic [ADC_W+CF_W+G_W-1:0] cap_ref[$];
  bit   cap_active = 0;
  logic cap_set[$];  // feedback settled for the captured word

  always @(posedge clk) if (rst_n && adc_strobe) begin
    tq_g.push_back(adc_g_true); tq_s.push_back(adc_settled);
  end

  always @(posedge clk) if (rst_n) begin
    #1;
    if (g_valid) begin
      real gt; logic st; int e;
      gt = tq_g.pop_front(); st = tq_s.pop_front();
      if (st && !scen_c && hold == 0 && (y_hat < 33 && y_hat > -33)) begin
        e = $rtoi(((gt - dv_volts) / (LAMBDA / 25.0)) + ((gt - dv_volts) >= 0 ? 0.5 : -0.5));
        checks++;
        if (g_tilde > e + 1 || g_tilde < e - 1) fail($sformatf("DRM g~=%0d expected %0d (g=%f)", g_tilde, e, gt));
        else n_drm_ok++;
      end
      if (cap_active) begin cap_ref.push_back({y_hat, cf_aligned, g_tilde}); cap_set.push_back(st); end
    end
  end

  // ---- DAC code rule, flag-to-step latency, T_F, mechanisms ----
  logic [1:0] flag_hist[3];
  fold_state_e st_hist[3];
  int ovrp_run = 0;

  int cf_peak = 0;
  int cap_peak = 0, cap_trough = 0;
  int hold = 400;  // cycles left in which recovered samples are not scored

  always @(posedge clk) if (rst_n) begin
    longint e;
    // the DAC register loads from the values present at this edge
    e = longint'(cf) * (longint'(1) << q) + (longint'(cf) - 1) * longint'(cal_step);
    if (e > 8191) e = 8191;
    if (e < -8192) e = -8192;
    if (cal_step != 0 && cf != 0) n_cal++;
    #1;
    checks++;
    if (longint'(dac_code) != e) fail($sformatf("DAC code %0d expected %0d", dac_code, e));
    if (state == ST_INCREASE && cf_update) n_inc++;
    if (state == ST_DECREASE && cf_update) n_dec++;
    if (state == ST_WAIT && dut.status.b2) n_wait_dwell++;
    if (cf_sat) n_sat++;
    if (!scen_c && (cf > cf_peak || -cf > cf_peak)) cf_peak = (cf > 0) ? int'(cf) : -int'(cf);
    if (!scen_c && hold == 0 && (y_out > LAMBDA + 0.06 || y_out < -LAMBDA - 0.06)) begin
      n_range++;
      if (n_range < 5) $display("y = %f out of window at t=%0t, g=%f cf=%0d", y_out, $time, g_in, cf);
    end
    if (hold > 0) hold--;
  end

  // flag present before edge 0 and FSM in KEEP on edge 2 -> step on edge 2
  always @(posedge clk) if (rst_n) begin
    logic [1:0] f_now;
    f_now = {ovrn_async, ovrp_async};
    #1;
    if (flag_hist[1] == 2'b01 && flag_hist[0] == 2'b01 && st_hist[0] == ST_KEEP && !(flag_hist[2] == 2'b01)) begin
      // flag first seen two edges ago, FSM was in KEEP before this edge
      checks++; n_lat++;
      if (!(state == ST_DECREASE)) fail("C_f step did not follow OVRP by two edges");
    end
    flag_hist[2] = flag_hist[1]; flag_hist[1] = flag_hist[0]; flag_hist[0] = f_now;
    st_hist[0] = state;
    if (scen_c) ovrp_run = 0;
    else if (ovrp_async) ovrp_run++;
    else if (ovrp_run > 0) begin
      tf_cnt++; if (ovrp_run < tf_min) tf_min = ovrp_run; if (ovrp_run > tf_max) tf_max = ovrp_run;
      ovrp_run = 0;
    end
  end

  task automatic run_sine(real amp, real freq, int cycles);
    for (int i = 0; i < cycles; i++) begin
      @(negedge clk);
      g_in = amp * $sin(2.0 * PI * freq * real'(i) * TCLK);
    end
  endtask

  initial begin
    for (int i = 0; i < 3; i++) begin flag_hist[i] = '0; st_hist[i] = ST_KEEP; end
    vpc = gain_for(7, 16);
    dv_volts = 16.0 * vpc;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (20) @(posedge clk);

    // ---- R: rho = 91.56, 2 kHz, capture of one period ----
    fork
      run_sine(9.156, 2.0e3, 200000);  // two whole periods cover the burst
      begin
        @(negedge clk); cap_arm = 1'b1; cap_active = 1;
        @(negedge clk); cap_arm = 1'b0;
        wait (cap_done);
        cap_active = 0;
        n_cap++;
      end
    join
    for (int a = 0; a < 65536; a++) begin
      logic signed [G_W-1:0] gw;
      @(negedge clk); cap_rd_addr = a[15:0];
      @(negedge clk);
      checks++;
      if (cap_rd_data != cap_ref[a]) fail($sformatf("capture word %0d differs", a));
      gw = cap_rd_data[G_W-1:0];
      if (a < 50000 && cap_set[a] && int'(gw) > cap_peak) cap_peak = int'(gw);
      if (a < 50000 && cap_set[a] && int'(gw) < cap_trough) cap_trough = int'(gw);
    end
    // expected extremes: +/-2289 codes shifted by the calibration offset dV
    $display("R done: recovered extremes (settled samples) in the 50,000-sample record = %0d / %0d codes (cf peak %0d)",
             cap_peak, cap_trough, cf_peak);
    checks++;
    if ($itor(cap_peak) < 2289.0 - dv_volts / (LAMBDA / 25.0) - 3.0 || $itor(cap_peak) > 2289.0 - dv_volts / (LAMBDA / 25.0) + 3.0)
      fail($sformatf("recovered peak %0d", cap_peak));
    checks++;
    if ($itor(cap_trough) < -2289.0 - dv_volts / (LAMBDA / 25.0) - 3.0 || $itor(cap_trough) > -2289.0 - dv_volts / (LAMBDA / 25.0) + 3.0)
      fail($sformatf("recovered trough %0d", cap_trough));
    cf_peak = 0;
    g_in = 0.0;
    repeat (200) @(negedge clk);

    // ---- A: q = 7, rho = 102, 1 kHz, one period ----
    run_sine(10.2, 1.0e3, 200000);
    $display("A done: peak |C_f| = %0d, C_f now %0d", cf_peak, cf);
    checks++; if (cf_peak != 51) fail($sformatf("rho = 102 should take |C_f| to 51, saw %0d", cf_peak));

    // ---- B: mode switch to q = 9, rho = 2.84 at 100 kHz ----
    g_in = 0.0;
    repeat (200) @(negedge clk);
    q = 4'd9; cal_step = 10'd64; vpc = gain_for(9, 64); dv_volts = 64.0 * vpc;
    n_qswitch++; hold = 200;
    run_sine(0.284, 100.0e3, 4000);
    // ---- C: saturation, rho = 40 at 10 kHz needs 20 folds, q = 9 allows 16 ----
    scen_c = 1;
    run_sine(4.0, 10.0e3, 20000);
    g_in = 0.0;
    repeat (400) @(negedge clk);

    $display("mechanisms: inc=%0d dec=%0d wait_dwell=%0d sat=%0d qswitch=%0d cal=%0d drm_ok=%0d captures=%0d latency_checks=%0d",
             n_inc, n_dec, n_wait_dwell, n_sat, n_qswitch, n_cal, n_drm_ok, n_cap, n_lat);
    $display("loop delay T_F (OVRP high time): %0d..%0d cycles over %0d folds", tf_min, tf_max, tf_cnt);
    checks++; if (n_inc == 0) fail("no INCREASE");
    checks++; if (n_dec == 0) fail("no DECREASE");
    checks++; if (n_wait_dwell == 0) fail("no WAIT dwell");
    checks++; if (n_sat == 0) fail("no saturation");
    checks++; if (n_qswitch == 0) fail("no q switch");
    checks++; if (n_cal == 0) fail("no calibration");
    checks++; if (n_drm_ok < 1000) fail("too few recovered samples checked");
    checks++; if (n_cap == 0) fail("no capture");
    checks++; if (n_lat == 0) fail("flag-to-step latency never checked");
    checks++; if (n_range != 0) fail($sformatf("folded output left the window %0d times", n_range));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
