// tb_multibit_step: self-checking testbench of the multi-bit fold step.
//
// For every q in 0..15 and a spread of fold counts (all of the range at
// large q, random ones at small q, plus the range ends and one past them),
// checks raw_code = C_f * 2^min(q,13) computed by multiplication, and the
// in_range flag against [-2^(13-q), 2^(13-q)-1]. Also checks the printed
// example of the source paper: C_f = -1 at q = 9 gives -512 codes, and
// q = 7 allows C_f up to 63.
module tb_multibit_step;
  import modulo_pkg::*;

  logic signed [CF_W-1:0] cf;
  logic [Q_W-1:0] q;
  logic signed [DAC_W+Q_MAX:0] raw_code;
  logic in_range;
  int checks = 0, failures = 0;

  multibit_step dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try_one(int c, int qq);
    int qe;
    longint expv;
    bit exp_in;
    qe = (qq > 13) ? 13 : qq;
    cf = CF_W'(c); q = Q_W'(qq);
    #1;
    expv = longint'(c) * (longint'(1) << qe);
    exp_in = (c >= -(1 << (13 - qe))) && (c <= (1 << (13 - qe)) - 1);
    checks++;
    if (longint'(raw_code) != expv || in_range != exp_in) begin
      failures++;
      if (failures < 10) $display("MISMATCH cf=%0d q=%0d raw=%0d exp=%0d in=%0b/%0b",
                                  c, qq, raw_code, expv, in_range, exp_in);
    end
  endtask

  initial begin
    int lim;
    try_one(-1, 9);
    checks++; if (raw_code != -512) begin failures++; $display("q=9 example wrong"); end
    try_one(63, 7);
    checks++; if (!in_range) begin failures++; $display("q=7 C_f=63 should be in range"); end
    try_one(64, 7);
    checks++; if (in_range) begin failures++; $display("q=7 C_f=64 should be out of range"); end
    for (int qq = 0; qq < 16; qq++) begin
      lim = 1 << (13 - ((qq > 13) ? 13 : qq));
      try_one(lim - 1, qq); try_one(-lim, qq);
      if (lim < 8192) begin try_one(lim, qq); try_one(-lim - 1, qq); end
      if (lim <= 256) for (int c = -lim; c < lim; c++) try_one(c, qq);
      else for (int i = 0; i < 600; i++) try_one($signed(14'($urandom)), qq);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
