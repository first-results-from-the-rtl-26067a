// lp_channel -- one complete LP FIR filter channel (one antenna polarization).
//
// Data flow: the raw sample x_in enters the delay line; its taps
// x[i-D-1 .. i-D-P] feed both the predictor and the covariance unit. The
// raw sample is delayed by the predictor latency LAT so that x[i] and its
// prediction meet in the subtractor, which produces the clean sample
// y_out = x[i] - pred[i]. Latency from x_in to y_out is LAT+1 clocks
// (lp_pkg::pred_latency(P)+1 = 8 for P = 32), one sample per clock.
// The covariance unit and the coefficient registers are reached by the
// processor through the cov_*, sum_* and coef_* ports (see lp_csr).
//
// Taken from the published filter description: raw trace -> update
// covariances -> (processor) calculate coefficients -> predict -> subtract
// -> clean trace. Own choices: sharing one delay line, aligning the raw
// sample with a register delay.
module lp_channel
  import lp_pkg::*;
#(
  parameter int unsigned DATA_W    = 14,
  parameter int unsigned COEF_W    = 14,
  parameter int unsigned COEF_FRAC = 12,
  parameter int unsigned P         = 32,
  parameter int unsigned D         = 128,
  parameter int unsigned N_COV     = 1024,
  parameter int unsigned ACC_W     = 2*DATA_W + $clog2(N_COV),
  localparam int unsigned IW       = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned RW       = $clog2(2*P)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  x_in,
  output logic signed [DATA_W-1:0]  y_out,
  output logic                      y_sat,
  output logic                      pred_sat,
  // coefficient registers
  input  logic                      coef_wr_en,
  input  logic [IW-1:0]             coef_idx,
  input  logic signed [COEF_W-1:0]  coef_wr_data,
  input  logic                      coef_commit,
  output logic signed [COEF_W-1:0]  coef_rd_data,
  // covariance unit
  input  logic                      cov_start,
  output logic                      cov_busy,
  output logic                      cov_done,
  input  logic [RW-1:0]             sum_idx,
  output logic signed [ACC_W-1:0]   sum_rd_data
);

  localparam int unsigned LAT = pred_latency(P);

  logic signed [DATA_W-1:0] taps  [P];
  logic signed [COEF_W-1:0] coefs [P];
  logic signed [DATA_W-1:0] pred;
  logic signed [DATA_W-1:0] x_dly [LAT];

  lp_delay_line #(.DATA_W(DATA_W), .D(D), .P(P)) u_delay (
    .clk, .rst_n, .x_in, .taps
  );

  lp_covariance #(.DATA_W(DATA_W), .P(P), .N_COV(N_COV), .ACC_W(ACC_W)) u_cov (
    .clk, .rst_n, .x_cur(x_in), .taps,
    .start(cov_start), .busy(cov_busy), .done(cov_done),
    .rd_idx(sum_idx), .rd_data(sum_rd_data)
  );

  lp_coef_bank #(.COEF_W(COEF_W), .P(P)) u_coef (
    .clk, .rst_n,
    .wr_en(coef_wr_en), .wr_idx(coef_idx), .wr_data(coef_wr_data),
    .commit(coef_commit), .rd_idx(coef_idx), .rd_data(coef_rd_data),
    .coefs
  );

  lp_predictor #(.DATA_W(DATA_W), .COEF_W(COEF_W), .COEF_FRAC(COEF_FRAC), .P(P)) u_pred (
    .clk, .rst_n, .taps, .coefs, .pred, .pred_sat
  );

  // Raw sample delayed to meet its prediction.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < LAT; j++) x_dly[j] <= '0;
    end else begin
      x_dly[0] <= x_in;
      for (int j = 1; j < LAT; j++) x_dly[j] <= x_dly[j-1];
    end
  end

  lp_subtract #(.DATA_W(DATA_W)) u_sub (
    .clk, .rst_n, .x(x_dly[LAT-1]), .pred, .y(y_out), .sat(y_sat)
  );

endmodule
