// flag_sync: multi-flop synchroniser for the asynchronous comparator flags.
//
// The window comparator's OVRP/OVRN outputs change at any time relative to the
// 200 MHz controller clock, so each flag passes through STAGES flip-flops
// before the folding FSM reads it. The output lags the input by STAGES clock
// cycles. The source paper does not describe a synchroniser; two stages is this
// design's choice and is part of the loop delay (the fold is applied about five
// cycles after a flag rises).
module flag_sync #(
  parameter int unsigned WIDTH  = 2,
  parameter int unsigned STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d_async,
  output logic [WIDTH-1:0] q_sync
);
  logic [WIDTH-1:0] sr [STAGES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < STAGES; i++) sr[i] <= '0;
    end else begin
      sr[0] <= d_async;
      for (int i = 1; i < STAGES; i++) sr[i] <= sr[i-1];
    end
  end

  assign q_sync = sr[STAGES-1];
endmodule
