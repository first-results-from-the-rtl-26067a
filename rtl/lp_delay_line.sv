// lp_delay_line -- tapped sample delay line of the LP FIR filter.
//
// Sample x[i] is predicted from the P samples x[i-D-1] .. x[i-D-P]; the gap
// of D samples keeps a short broadband pulse from predicting (and so
// cancelling) itself. This module is a shift chain of D+P registers: on
// every clock the current sample enters stage 0, so while x_in carries
// x[i], stage j holds x[i-1-j] and taps[k] = stage D+k = x[i-D-1-k].
// The taps are registers, read in the same cycle as x_in (no extra latency).
//
// Taken from the published filter description: the tap positions (samples
// i-p-D to i-D-1 as labelled in its illustration), P = 32 stages and D = 128
// of the deployed filter.
// Choices made in this design: a plain register chain, synchronous clear to
// zero.
module lp_delay_line #(
  parameter int unsigned DATA_W = 14,
  parameter int unsigned D      = 128,
  parameter int unsigned P      = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  x_in,
  output logic signed [DATA_W-1:0]  taps [P]
);

  localparam int unsigned LEN = D + P;

  logic signed [DATA_W-1:0] stage [LEN];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < LEN; j++) stage[j] <= '0;
    end else begin
      stage[0] <= x_in;
      for (int j = 1; j < LEN; j++) stage[j] <= stage[j-1];
    end
  end

  always_comb begin
    for (int k = 0; k < P; k++) taps[k] = stage[D+k];
  end

endmodule
