// tb_undercomp_cal: self-checking testbench of the under-compensation stage.
//
// Drives C_f, raw code = C_f * 2^q and the calibration step dV (in DAC codes)
// and checks the registered DAC code against
//   code = sat14(C_f * 2^q + (C_f - 1) * dV)
// one cycle later, including the clipped flag. A directed part reproduces the
// calibration example of the source paper in DAC codes: with a trimmed step of
// 9 codes per fold (180 mV) and dV = 1 code (20 mV), the fed-back value is
// C_f * 10 - 1 codes (v_f - dV) for C_f = 1..10.
module tb_undercomp_cal;
  import modulo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [CF_W-1:0] cf = '0;
  logic signed [DAC_W+Q_MAX:0] raw_code = '0;
  logic [CAL_W-1:0] cal_step = '0;
  logic signed [DAC_W-1:0] dac_code;
  logic clipped;
  int checks = 0, failures = 0;
  int n_clip = 0;

  undercomp_cal dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int c, int raw, int d);
    longint s;
    int e;
    bit ec;
    cf = CF_W'(c); raw_code = (DAC_W+Q_MAX+1)'(raw); cal_step = CAL_W'(d);
    @(posedge clk); #1;
    s = longint'(raw) + (longint'(c) - 1) * longint'(d);
    ec = (s > 8191) || (s < -8192);
    e = (s > 8191) ? 8191 : (s < -8192) ? -8192 : int'(s);
    if (ec) n_clip++;
    checks++;
    if (int'(dac_code) != e || clipped != ec) begin
      failures++;
      if (failures < 10) $display("MISMATCH cf=%0d raw=%0d dV=%0d code=%0d exp=%0d clip=%0b/%0b",
                                  c, raw, d, dac_code, e, clipped, ec);
    end
  endtask

  initial begin
    int qq, c;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // Worked example (codes): step 9, dV 1 -> 10*C_f - 1.
    for (int k = 1; k <= 10; k++) begin
      apply(k, 9 * k, 1);
      checks++;
      if (int'(dac_code) != 10 * k - 1) begin failures++; $display("example C_f=%0d gives %0d", k, dac_code); end
    end
    // dV = 0: code = raw.
    apply(-3, -3 * 128, 0);
    // Random.
    for (int i = 0; i < 30000; i++) begin
      qq = $urandom_range(0, 13);
      c = $urandom_range(0, (2 << (13 - qq)) - 1) - (1 << (13 - qq));
      if ($urandom_range(0, 9) == 0) c = c * 2;  // occasionally outside the range
      c = (c > 8191) ? 8191 : (c < -8192) ? -8192 : c;
      apply(c, c * (1 << qq), $urandom_range(0, 1023));
    end
    checks++;
    if (n_clip == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
