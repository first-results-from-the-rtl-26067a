// lp_subtract -- the "Subtract" step of the LP FIR filter.
//
// Produces the clean trace y = x - pred, where pred is the predicted
// (interference) part of the raw sample x. Both inputs must refer to the
// same sample. The difference is clipped to the DATA_W-bit signed range and
// registered: y appears one clock after its inputs, sat flags a clipped
// sample in the same cycle.
//
// Taken from the published filter description: the subtraction of the
// prediction from the ADC data.
// Choices made in this design: output width equal to input width,
// saturation, the register.
module lp_subtract #(
  parameter int unsigned DATA_W = 14
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  x,
  input  logic signed [DATA_W-1:0]  pred,
  output logic signed [DATA_W-1:0]  y,
  output logic                      sat
);

  localparam logic signed [DATA_W:0] MAXV = (DATA_W+1)'((1 << (DATA_W-1)) - 1);
  localparam logic signed [DATA_W:0] MINV = -(DATA_W+1)'(1 << (DATA_W-1));

  logic signed [DATA_W:0]   diff;
  logic signed [DATA_W-1:0] diff_sat;
  logic                     clip;

  always_comb begin
    diff = (DATA_W+1)'(x) - (DATA_W+1)'(pred);
    clip = 1'b0;
    if (diff > MAXV) begin
      diff_sat = MAXV[DATA_W-1:0];
      clip     = 1'b1;
    end else if (diff < MINV) begin
      diff_sat = MINV[DATA_W-1:0];
      clip     = 1'b1;
    end else begin
      diff_sat = diff[DATA_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y   <= '0;
      sat <= 1'b0;
    end else begin
      y   <= diff_sat;
      sat <= clip;
    end
  end

endmodule
