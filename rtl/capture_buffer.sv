// capture_buffer: on-chip sample memory for one acquisition burst.
//
// The source paper stores the folded ADC samples in FPGA memory in real time
// and reads them out for display; it gives neither the depth nor the control.
// This design's version: a one-cycle `arm` pulse starts a burst, the next
// DEPTH words presented with `in_valid` are written at addresses 0..DEPTH-1,
// then `done` rises and stays high until the next `arm` (`busy` is high in
// between). A read port, usable at any time, returns the word at `rd_addr`
// one clock later. The memory is a plain array so synthesis maps it to block
// RAM. The module default of 8192 words is only a convenient size; the
// channel top instantiates 65536 words, enough for the 50,000-sample
// records (0.5 ms at 100 MSPS) shown for on-board recovery.
module capture_buffer #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned W     = 46
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     arm,
  input  logic                     in_valid,
  input  logic [W-1:0]             in_data,
  output logic                     busy,
  output logic                     done,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      wr_addr <= '0;
    end else if (arm) begin
      busy    <= 1'b1;
      done    <= 1'b0;
      wr_addr <= '0;
    end else if (busy && in_valid) begin
      wr_addr <= wr_addr + 1'b1;
      if (wr_addr == AW'(DEPTH - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && in_valid && !arm) mem[wr_addr] <= in_data;
    rd_data <= mem[rd_addr];
  end

  // A burst is either running or finished, never both.
  a_busy_done_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(busy && done));
endmodule
