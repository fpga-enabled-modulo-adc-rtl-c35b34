// drm: direct recovery module.
//
// Rebuilds the unfolded input from each ADC sample and the fold count:
//     g~[k] = y^[k] - 2*lambda * C_f
// (source paper, Sec. on the direct recovery module). y^[k] is the signed
// 8-bit ADC sample, `two_lambda` is 2*lambda in ADC codes (50 for
// lambda = 0.1 V, which the ADC reads as 25 codes), and C_f is the count that
// was fed back when the sample was taken. Because the sample reaches the FPGA
// some cycles after the DAC was set (DAC latency, analog settling, ADC
// pipeline), C_f passes through a delay line whose length, `cf_delay` clock
// cycles (0..CF_DEPTH-1, set at run time), is matched to that latency; the
// delay line and its run-time length are this design's choices, the paper only
// says the stored count is combined with the sample.
// Timing: `y_valid` marks a sample (the ADC strobe, every other 200 MHz cycle
// at 100 MSPS); g~ appears one clock later with `g_valid`, together with the
// y^ and C_f it was made from.
module drm
  import modulo_pkg::*;
#(
  parameter int unsigned CF_DEPTH = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic signed [CF_W-1:0]        cf,
  input  logic [$clog2(CF_DEPTH)-1:0]   cf_delay,
  input  logic [TWOL_W-1:0]             two_lambda,
  input  logic                          y_valid,
  input  logic signed [ADC_W-1:0]       y_hat,
  output logic                          g_valid,
  output logic signed [G_W-1:0]         g_tilde,
  output logic signed [ADC_W-1:0]       y_out,
  output logic signed [CF_W-1:0]        cf_out
);
  // cf_hist[i] holds C_f as it was i+1 cycles ago; cf_delay = 0 uses the
  // current value.
  logic signed [CF_W-1:0] cf_hist [CF_DEPTH];
  logic signed [CF_W-1:0] cf_al;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < CF_DEPTH; i++) cf_hist[i] <= '0;
    end else begin
      cf_hist[0] <= cf;
      for (int i = 1; i < CF_DEPTH; i++) cf_hist[i] <= cf_hist[i-1];
    end
  end

  assign cf_al = (cf_delay == '0) ? cf : cf_hist[cf_delay - 1'b1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      g_valid <= 1'b0;
      g_tilde <= '0;
      y_out   <= '0;
      cf_out  <= '0;
    end else begin
      g_valid <= y_valid;
      if (y_valid) begin
        g_tilde <= G_W'(y_hat) - G_W'(cf_al) * G_W'($signed({1'b0, two_lambda}));
        y_out   <= y_hat;
        cf_out  <= cf_al;
      end
    end
  end
endmodule
