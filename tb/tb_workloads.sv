// tb_workloads: the test-signal set of the measurement campaign, run through
// the closed loop (modulo_adc_top at its default sizes plus afe_model), with
// lambda = 0.1 V, q = 7 and under-compensation on.
//
// Signals (dynamic-range factor rho = peak / lambda, bandwidth B, repetition
// f_m as listed for the measurements; the waveform formulas are this bench's
// own, since only those figures are given):
//   sine   rho 2.84 @ 100 kHz, rho 22.2 @ 10 kHz, rho 102 @ 1 kHz (quarter period)
//   sinc   periodic A*sinc(2B(t - T/2)), T = 1/f_m:
//          rho 3.24 (B 410 kHz, f_m 23 kHz), 9.16 (99 kHz, 5 kHz), 29.8 (18 kHz, 1 kHz)
//   QAM    16-QAM, symbol rate B = 4 kHz, carrier 2B, raised-cosine symbol
//          transitions, rho 10.4
//   BPSK   symbol rate B = 2 kHz, carrier 2B, rho 5.2
//   FSK    continuous-phase binary FSK, tones B and 2B, B = 2 kHz, rho 8.0
// Each signal runs for one repetition period or 1 ms (at most), then the input
// returns to zero along a 20 us ramp. Checks: every
// settled recovered sample equals the quantised input less the calibration
// offset (within 1 code), the folded output stays within
// +/-(lambda + 60 mV), the fold count returns to 0, and its peak is no larger
// than ceil(rho / 2) + 1 (and not zero).
module tb_workloads;
  import modulo_pkg::*;

  localparam real LAMBDA = 0.1;
  localparam real LSB = LAMBDA / 25.0;
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
  real g_in = 0.0, vpc, adc_g_true, y_out, v_fb, dv_volts;
  logic adc_settled;

  modulo_adc_top dut (.*);
  afe_model #(.LAMBDA(LAMBDA), .ADC_LAT(ADC_LAT)) u_afe (
    .clk, .g_in, .volts_per_code(vpc), .dac_data, .adc_strobe,
    .ovrp(ovrp_async), .ovrn(ovrn_async), .adc_data, .adc_g_true, .adc_settled,
    .y_out, .v_fb
  );

  always #2.5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ok = 0, n_range = 0, cf_peak = 0, hold = 400;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t: %s", $time, msg);
  endtask

  initial begin
    #40ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real  tq_g[$];
  logic tq_s[$];
  always @(posedge clk) if (rst_n && adc_strobe) begin
    tq_g.push_back(adc_g_true); tq_s.push_back(adc_settled);
  end
  always @(posedge clk) if (rst_n) begin
    #1;
    if (g_valid) begin
      real gt; logic st; int e;
      gt = tq_g.pop_front(); st = tq_s.pop_front();
      if (st && hold == 0) begin
        e = $rtoi(((gt - dv_volts) / LSB) + ((gt - dv_volts) >= 0 ? 0.5 : -0.5));
        checks++;
        if (g_tilde > e + 1 || g_tilde < e - 1) fail($sformatf("g~=%0d expected %0d", g_tilde, e));
        else n_ok++;
      end
    end
    if (hold == 0 && (y_out > LAMBDA + 0.06 || y_out < -LAMBDA - 0.06)) begin
      n_range++;
      if (n_range < 5) $display("excursion y=%f at t=%0t g=%f", y_out, $time, g_in);
    end
    if (cf > cf_peak) cf_peak = cf;
    if (-cf > cf_peak) cf_peak = -cf;
    if (hold > 0) hold--;
  end

  function automatic real sinc(real x);
    return (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
  endfunction

  // smooth step between symbol values a and b over one symbol
  function automatic real blend(real a, real b, real frac);
    return a + (b - a) * (1.0 - $cos(PI * frac)) / 2.0;
  endfunction

  // deterministic symbol sequence
  function automatic int sym(int k, int m);
    return ((k * 7 + 3) * 13 + k / 3) % m;
  endfunction

  function automatic real sig(int kind, real t, real rho, real b, real fm);
    real a, tau, fr, i0, i1, q0, q1, ph;
    int k;
    a = rho * LAMBDA;
    case (kind)
      0: return a * $sin(2.0 * PI * fm * t);
      1: begin
        tau = t - $floor(t * fm) / fm - 0.5 / fm;
        return a * sinc(2.0 * b * tau);
      end
      2, 3: begin  // QAM (2) and BPSK (3), symbols ramp in from zero
        k = $rtoi($floor(t * b)); fr = t * b - real'(k);
        if (kind == 2) begin
          i0 = (k == 0) ? 0.0 : real'(2 * sym(k - 1, 4) - 3); i1 = real'(2 * sym(k, 4) - 3);
          q0 = (k == 0) ? 0.0 : real'(2 * sym(k + 5, 4) - 3); q1 = real'(2 * sym(k + 6, 4) - 3);
          return a / $sqrt(18.0) * (blend(i0, i1, fr) * $cos(2.0 * PI * 2.0 * b * t)
                                   - blend(q0, q1, fr) * $sin(2.0 * PI * 2.0 * b * t));
        end
        i0 = (k == 0) ? 0.0 : real'(2 * sym(k - 1, 2) - 1); i1 = real'(2 * sym(k, 2) - 1);
        return a * blend(i0, i1, fr) * $sin(2.0 * PI * 2.0 * b * t);
      end
      default: begin  // CP-FSK: phase accumulates over whole symbols
        k = $rtoi($floor(t * b)); fr = t * b - real'(k);
        ph = 0.0;
        for (int j = 0; j < k; j++) ph += 2.0 * PI * real'(1 + sym(j, 2));
        ph += 2.0 * PI * real'(1 + sym(k, 2)) * fr;
        return a * $sin(ph);
      end
    endcase
  endfunction

  task automatic run(string name, int kind, real rho, real b, real fm, real dur);
    int n;
    int lim;
    n = $rtoi(dur / TCLK);
    cf_peak = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      g_in = sig(kind, real'(i) * TCLK, rho, b, fm);
    end
    // return to zero along a slow ramp (the signal may end away from zero)
    begin
      real g_end;
      g_end = g_in;
      for (int i = 1; i <= 4000; i++) begin
        @(negedge clk);
        g_in = g_end * real'(4000 - i) / 4000.0;
      end
    end
    repeat (400) @(negedge clk);
    lim = $rtoi($ceil(rho / 2.0)) + 1;
    $display("%-6s rho=%6.2f: peak |C_f| = %0d (limit %0d), end C_f = %0d", name, rho, cf_peak, lim, cf);
    checks++; if (cf_peak > lim || cf_peak == 0) fail($sformatf("%s: peak |C_f| %0d", name, cf_peak));
    checks++; if (cf != 0) fail($sformatf("%s: C_f did not return to 0", name));
  endtask

  initial begin
    vpc = 2.0 * LAMBDA / real'(128 + 16);
    dv_volts = 16.0 * vpc;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (20) @(posedge clk);
    run("sine",  0, 2.84, 0.0, 100.0e3, 20.0e-6);
    run("sine",  0, 22.2, 0.0, 10.0e3, 100.0e-6);
    run("sine",  0, 102.0, 0.0, 1.0e3, 1.0e-3);
    run("sinc",  1, 3.24, 410.0e3, 23.0e3, 1.0 / 23.0e3);
    run("sinc",  1, 9.16, 99.0e3, 5.0e3, 1.0 / 5.0e3);
    run("sinc",  1, 29.8, 18.0e3, 1.0e3, 1.0e-3);
    run("QAM",   2, 10.4, 4.0e3, 0.0, 1.0e-3);
    run("BPSK",  3, 5.2, 2.0e3, 0.0, 1.0e-3);
    run("FSK",   4, 8.0, 2.0e3, 0.0, 1.0e-3);
    $display("recovered samples checked: %0d, window excursions: %0d", n_ok, n_range);
    checks++; if (n_ok < 10000) fail("too few recovered samples checked");
    checks++; if (n_range != 0) fail($sformatf("folded output left the window %0d times", n_range));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
