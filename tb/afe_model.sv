// afe_model: behavioural model of the analog side of one modulo-ADC channel,
// for closed-loop simulation of the FPGA loop controller. Not synthesizable.
//
// It stands in for the input buffer, loop DAC, gain stage, summing amplifier,
// bipolar threshold generator, window comparator and sampling ADC:
//   * loop DAC: latches the 14-bit offset-binary code on each clock edge and
//     outputs volts_per_code * code one edge later (DAC_LAT = 1 cycle);
//     volts_per_code is the DAC LSB times the total gain of the scaling stage;
//   * settling: the fed-back voltage moves toward its target by the fraction
//     ALPHA per 5 ns step (finite DAC/amplifier slew and bandwidth);
//   * summing node: y = g + v_fb;
//   * window comparator: OVRP (y > +lambda) and OVRN (y < -lambda) with
//     HYST of hysteresis (3.5 mV, as for the comparator of the design);
//   * ADC: on each sample strobe it quantises y with LSB = lambda/25 (so
//     lambda reads as 25 codes) to 8-bit two's complement and presents the
//     word ADC_LAT strobes later.
// The model updates the analog nodes on the falling clock edge and the
// converters on the rising edge. Alongside each ADC word it presents the true
// input g and whether the feedback had settled when the sample was taken, so
// a testbench can score the recovered samples.
module afe_model #(
  parameter real LAMBDA  = 0.1,
  parameter real HYST    = 0.0035,
  parameter real ALPHA   = 0.6,
  parameter int  ADC_LAT = 5
) (
  input  logic        clk,
  input  real         g_in,           // input voltage g(t)
  input  real         volts_per_code, // fold-path gain: volts per DAC code
  input  logic [13:0] dac_data,       // offset binary from the FPGA
  input  logic        adc_strobe,     // sample slot from the FPGA
  output logic        ovrp,
  output logic        ovrn,
  output logic signed [7:0] adc_data,
  output real         adc_g_true,     // g at the instant of the sample on adc_data
  output logic        adc_settled,    // feedback settled at that instant
  output real         y_out,          // folded output y(t)
  output real         v_fb            // fed-back voltage
);
  localparam real LSB = LAMBDA / 25.0;

  int  dac_latched = 0;
  int  dac_prev    = 0;
  int  stable_cnt  = 0;
  real y = 0.0;
  logic signed [7:0] pipe_code [ADC_LAT];
  real pipe_g [ADC_LAT];
  logic pipe_set [ADC_LAT];

  initial begin
    v_fb = 0.0; y_out = 0.0; ovrp = 1'b0; ovrn = 1'b0;
    adc_data = '0; adc_g_true = 0.0; adc_settled = 1'b0;
    for (int i = 0; i < ADC_LAT; i++) begin pipe_code[i] = '0; pipe_g[i] = 0.0; pipe_set[i] = 1'b0; end
  end

  function automatic int to_code(real v);
    int c;
    c = $rtoi((v >= 0.0) ? (v / LSB + 0.5) : (v / LSB - 0.5));
    if (c > 127) c = 127;
    if (c < -128) c = -128;
    return c;
  endfunction

  // DAC register: offset binary back to a signed code.
  always @(posedge clk) begin
    dac_prev    <= dac_latched;
    dac_latched <= int'(dac_data) - 8192;
  end

  // Analog nodes.
  always @(negedge clk) begin
    real target;
    target = volts_per_code * real'(dac_latched);
    v_fb = v_fb + (target - v_fb) * ALPHA;
    if (dac_latched != dac_prev) stable_cnt = 0;
    else if (stable_cnt < 1000) stable_cnt++;
    y = g_in + v_fb;
    y_out = y;
    if (!ovrp && y > LAMBDA) ovrp = 1'b1;
    else if (ovrp && y < LAMBDA - HYST) ovrp = 1'b0;
    if (!ovrn && y < -LAMBDA) ovrn = 1'b1;
    else if (ovrn && y > -LAMBDA + HYST) ovrn = 1'b0;
  end

  // ADC.
  always @(posedge clk) begin
    if (adc_strobe) begin
      for (int i = ADC_LAT - 1; i > 0; i--) begin
        pipe_code[i] = pipe_code[i-1]; pipe_g[i] = pipe_g[i-1]; pipe_set[i] = pipe_set[i-1];
      end
      pipe_code[0] = 8'(to_code(y));
      pipe_g[0]    = g_in;
      pipe_set[0]  = (stable_cnt >= 8);
      adc_data    <= pipe_code[ADC_LAT-1];
      adc_g_true  <= pipe_g[ADC_LAT-1];
      adc_settled <= pipe_set[ADC_LAT-1];
    end
  end
endmodule
