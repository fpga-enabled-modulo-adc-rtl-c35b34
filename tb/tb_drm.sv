// tb_drm: self-checking testbench of the direct recovery module.
//
// Feeds a fold count that changes at random, ADC samples on every other
// cycle (the 100 MSPS strobe) and random settings of 2*lambda and of the C_f
// alignment delay, and checks each output word against
//   g~ = y^ - 2*lambda * C_f(d cycles before the sample edge)
// computed from a history of the C_f values the testbench drove. It also
// checks that g~ follows its sample by exactly one clock, and reproduces the
// on-board example of the source paper (lambda = 25 ADC codes, so 2*lambda = 50).
module tb_drm;
  import modulo_pkg::*;
  localparam int unsigned CF_DEPTH = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [CF_W-1:0] cf = '0;
  logic [$clog2(CF_DEPTH)-1:0] cf_delay = '0;
  logic [TWOL_W-1:0] two_lambda = 9'd50;
  logic y_valid = 1'b0;
  logic signed [ADC_W-1:0] y_hat = '0;
  logic g_valid;
  logic signed [G_W-1:0] g_tilde;
  logic signed [ADC_W-1:0] y_out;
  logic signed [CF_W-1:0] cf_out;
  int checks = 0, failures = 0;

  drm #(.CF_DEPTH(CF_DEPTH)) dut (.*);

  always #2.5 clk = ~clk;

  int hist[$];  // hist[0] = C_f seen at the latest edge

  initial begin
    #3000000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(bit v, int y, int c, int d, int tl);
    int cal, e;
    y_valid = v; y_hat = ADC_W'(y); cf = CF_W'(c); cf_delay = 5'(d); two_lambda = TWOL_W'(tl);
    @(posedge clk);
    hist.push_front(c);
    if (hist.size() > 40) void'(hist.pop_back());
    #1;
    checks++;
    if (g_valid != v) begin failures++; $display("g_valid timing wrong"); end
    if (v) begin
      cal = (hist.size() > d) ? hist[d] : 0;
      e = y - cal * tl;
      checks++;
      if (int'(g_tilde) != e || int'(cf_out) != cal || int'(y_out) != y) begin
        failures++;
        if (failures < 10) $display("MISMATCH y=%0d cf_al=%0d/%0d 2l=%0d g=%0d exp=%0d", y, cf_out, cal, tl, g_tilde, e);
      end
    end
  endtask

  initial begin
    int c, d, tl;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) hist.push_front(0);
    // Paper example: lambda = 25 codes; a sample of -20 with C_f = -3 is 130.
    tick(0, 0, -3, 0, 50);
    tick(1, -20, -3, 0, 50);
    checks++; if (g_tilde != 130) begin failures++; $display("example gives %0d", g_tilde); end
    c = 0; d = 0; tl = 50;
    for (int i = 0; i < 40000; i++) begin
      if ($urandom_range(0, 5) == 0) c = c + $urandom_range(0, 2) - 1;
      if ($urandom_range(0, 999) == 0) c = $urandom_range(0, 16383) - 8192;
      if ($urandom_range(0, 499) == 0) d = $urandom_range(0, 31);
      if ($urandom_range(0, 999) == 0) tl = $urandom_range(0, 511);
      tick(i[0], $urandom_range(0, 255) - 128, c, d, tl);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
