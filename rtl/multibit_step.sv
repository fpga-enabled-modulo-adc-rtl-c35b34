// multibit_step: multi-bit fold step of the loop DAC.
//
// Each fold moves the DAC by 2^q codes, so the raw feedback code is
// raw = C_f * 2^q (an arithmetic left shift), with q set at run time. In a
// 14-bit DAC with one sign bit this leaves C_f in [-2^(13-q), 2^(13-q)-1]
// (e.g. q = 7 gives [-64, 63], q = 9 gives [-16, 15] and one fold of -512
// codes). Both follow the source paper. The output is one bit wider than the
// DAC word so that the calibration stage after it can saturate a sum once;
// `in_range` is low when C_f lies outside the range for this q (possible only
// right after q is raised), which this design's choice is to report rather
// than hide. Purely combinational; q above 13 is treated as 13.
module multibit_step
  import modulo_pkg::*;
(
  input  logic signed [CF_W-1:0]  cf,
  input  logic [Q_W-1:0]          q,
  output logic signed [DAC_W+Q_MAX:0] raw_code,  // C_f * 2^q, never overflows
  output logic                    in_range
);
  logic [Q_W-1:0] qq;

  always_comb begin
    qq       = (q > Q_MAX[Q_W-1:0]) ? Q_MAX[Q_W-1:0] : q;
    raw_code = (DAC_W+Q_MAX+1)'(cf) <<< qq;
    in_range = (cf >= cf_min(qq)) && (cf <= cf_max(qq));
  end
endmodule
