// tb_capture_buffer: self-checking testbench of the burst capture memory.
//
// Arms a burst, offers words with gaps in in_valid, and checks that exactly
// DEPTH words are stored in order (words after the burst are ignored), that
// busy/done behave, that the read port returns each word one clock after its
// address, and that re-arming starts a fresh burst at address 0.
module tb_capture_buffer;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned W = 46;

  logic clk = 1'b0, rst_n = 1'b0;
  logic arm = 1'b0, in_valid = 1'b0;
  logic [W-1:0] in_data = '0;
  logic busy, done;
  logic [$clog2(DEPTH)-1:0] rd_addr = '0;
  logic [W-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [DEPTH];

  capture_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic burst(int seed);
    int n = 0;
    int cyc = 0;
    @(negedge clk); arm = 1'b1;
    @(negedge clk); arm = 1'b0;
    checks++; if (!busy || done) begin failures++; $display("arm did not start a burst"); end
    while (n < DEPTH + 20) begin
      in_valid = ($urandom_range(0, 2) != 0);
      in_data = {14'($urandom), 32'($urandom)} ^ W'(seed);
      if (in_valid && n < DEPTH) ref_mem[n] = in_data;
      if (in_valid) n++;
      @(negedge clk);
      cyc++;
      if (n == DEPTH) begin
        checks++; if (!done || busy) begin failures++; $display("done not raised after DEPTH words"); end
      end
    end
    in_valid = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = a[$clog2(DEPTH)-1:0];
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("word %0d: %h expected %h", a, rd_data, ref_mem[a]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++; if (busy || done) begin failures++; $display("busy/done after reset"); end
    burst(1);
    burst(77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
