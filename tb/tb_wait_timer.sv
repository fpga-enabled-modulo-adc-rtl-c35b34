// tb_wait_timer: self-checking testbench of the wait-flag (B2) generator.
//
// Issues start pulses with random wait lengths, some of them while a count is
// still running (reload), and checks B2 every cycle against a counter model:
// B2 is high for exactly wait_cycles cycles after the edge that sees start.
// A directed part measures the high time for N = 0, 1, 5 and 200.
module tb_wait_timer;
  import modulo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [WAIT_W-1:0] wait_cycles = '0;
  logic b2;
  int checks = 0, failures = 0;
  int m_cnt = 0;

  wait_timer dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(bit st, int n);
    start = st; wait_cycles = WAIT_W'(n);
    @(posedge clk);
    if (st) m_cnt = n; else if (m_cnt > 0) m_cnt--;
    #1;
    checks++;
    if (b2 != (m_cnt != 0)) begin
      failures++;
      if (failures < 10) $display("MISMATCH t=%0t b2=%0b model count=%0d", $time, b2, m_cnt);
    end
  endtask

  task automatic measure(int n);
    int high = 0;
    tick(1, n);
    while (b2) begin tick(0, 0); high++; if (high > 1000) break; end
    // each loop pass began with b2 high: `high` is the number of high cycles
    checks++;
    if (high != n) begin
      failures++; $display("dwell for N=%0d measured %0d", n, high);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (b2) begin failures++; $display("b2 high after reset"); end
    measure(0); measure(1); measure(5); measure(200);
    for (int i = 0; i < 20000; i++)
      tick($urandom_range(0, 9) == 0, $urandom_range(0, 12));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
