// undercomp_cal: controlled under-compensation calibration and DAC register.
//
// The analog fold step is trimmed on purpose a little below 2*lambda (it is
// G_total * 2^q * V_LSB = 2*lambda - dV) to stop the overshoot that full-size
// steps excite. Left alone, the missing dV per fold would pile up as C_f * dV.
// Following the source paper, the FPGA adds the digital correction
// (C_f - 1) * dV to the feedback, so the fed-back voltage becomes
// v_f - dV whatever the fold count: a constant offset instead of a growing
// error. Here dV is given in DAC codes (`cal_step`, 0 switches the correction
// off), so the code sent to the DAC is
//     code = raw_code + (C_f - 1) * cal_step
// saturated to the 14-bit two's-complement DAC range; `clipped` flags a
// saturated cycle. The result is registered: the DAC code follows C_f by one
// 200 MHz cycle. Expressing dV as a whole number of DAC codes and saturating
// are this design's choices.
module undercomp_cal
  import modulo_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic signed [CF_W-1:0]      cf,
  input  logic signed [DAC_W+Q_MAX:0] raw_code,
  input  logic [CAL_W-1:0]            cal_step,
  output logic signed [DAC_W-1:0]     dac_code,
  output logic                        clipped
);
  localparam int unsigned SUM_W = DAC_W + Q_MAX + CAL_W + 3;
  localparam logic signed [SUM_W-1:0] CODE_MAX = SUM_W'((1 << (DAC_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] CODE_MIN = -SUM_W'(1 << (DAC_W - 1));

  logic signed [SUM_W-1:0] corr, sum;
  logic signed [DAC_W-1:0] code_n;
  logic clip_n;

  always_comb begin
    corr = (SUM_W'(cf) - SUM_W'(1)) * SUM_W'($signed({1'b0, cal_step}));
    sum  = SUM_W'(raw_code) + corr;
    clip_n = 1'b0;
    if (sum > CODE_MAX) begin
      code_n = CODE_MAX[DAC_W-1:0];
      clip_n = 1'b1;
    end else if (sum < CODE_MIN) begin
      code_n = CODE_MIN[DAC_W-1:0];
      clip_n = 1'b1;
    end else begin
      code_n = sum[DAC_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dac_code <= '0;
      clipped  <= 1'b0;
    end else begin
      dac_code <= code_n;
      clipped  <= clip_n;
    end
  end
endmodule
