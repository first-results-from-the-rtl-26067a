// lp_fir_top -- adaptive linear-prediction FIR filter against narrow-band
// radio interference, NUM_CH channels with one processor bus slave.
//
// Each channel (lp_channel) turns a raw ADC trace into a clean trace by
// subtracting, from every sample x[i], a prediction formed from the samples
// x[i-D-1] .. x[i-D-P]. Periodic interference (radio carriers) is
// predictable and cancels; a short air-shower pulse is not, because of the
// gap of D samples, and passes. The coefficients are adapted by a processor
// on the bus: it starts a covariance run (N_COV samples), reads the 2P sums,
// solves the P normal equations, writes the P coefficients and commits them.
//
// Interface: adc_data/clean_data carry one signed DATA_W-bit sample per
// channel per clock; clean_data lags adc_data by lp_pkg::pred_latency(P)+1
// clocks (8 with the defaults). clean_sat flags a clipped output sample.
// The avs_* ports are the processor bus (see lp_csr for the register map);
// irq is high while any channel holds a finished covariance run.
//
// Defaults follow the filter deployed in the field: P = 32 stages, D = 128,
// 14-bit coefficients, 14-bit samples, 1024-sample covariance blocks. Two
// channels (one per antenna polarization) and the Q2.12 coefficient format
// are this design's own choices.
module lp_fir_top
  import lp_pkg::*;
#(
  parameter int unsigned NUM_CH    = 2,
  parameter int unsigned DATA_W    = 14,
  parameter int unsigned COEF_W    = 14,
  parameter int unsigned COEF_FRAC = 12,
  parameter int unsigned P         = 32,
  parameter int unsigned D         = 128,
  parameter int unsigned N_COV     = 1024,
  localparam int unsigned ACC_W    = 2*DATA_W + $clog2(N_COV),
  localparam int unsigned CH_W     = (NUM_CH > 1) ? $clog2(NUM_CH) : 1,
  localparam int unsigned AW       = CH_W + REG_AW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  adc_data   [NUM_CH],
  output logic signed [DATA_W-1:0]  clean_data [NUM_CH],
  output logic [NUM_CH-1:0]         clean_sat,
  input  logic [AW-1:0]             avs_address,
  input  logic                      avs_write,
  input  logic [31:0]               avs_writedata,
  input  logic                      avs_read,
  output logic [31:0]               avs_readdata,
  output logic                      avs_readdatavalid,
  output logic                      irq
);

  localparam int unsigned IW = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned RW = $clog2(2*P);

  logic [NUM_CH-1:0]         cov_start, coef_wr_en, coef_commit;
  logic [NUM_CH-1:0]         cov_busy, cov_done, pred_sat;
  logic [IW-1:0]             coef_idx;
  logic signed [COEF_W-1:0]  coef_wr_data;
  logic [RW-1:0]             sum_idx;
  logic signed [COEF_W-1:0]  coef_rd_data [NUM_CH];
  logic signed [ACC_W-1:0]   sum_rd_data  [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    lp_channel #(
      .DATA_W(DATA_W), .COEF_W(COEF_W), .COEF_FRAC(COEF_FRAC),
      .P(P), .D(D), .N_COV(N_COV), .ACC_W(ACC_W)
    ) u_ch (
      .clk, .rst_n,
      .x_in        (adc_data[c]),
      .y_out       (clean_data[c]),
      .y_sat       (clean_sat[c]),
      .pred_sat    (pred_sat[c]),
      .coef_wr_en  (coef_wr_en[c]),
      .coef_idx    (coef_idx),
      .coef_wr_data(coef_wr_data),
      .coef_commit (coef_commit[c]),
      .coef_rd_data(coef_rd_data[c]),
      .cov_start   (cov_start[c]),
      .cov_busy    (cov_busy[c]),
      .cov_done    (cov_done[c]),
      .sum_idx     (sum_idx),
      .sum_rd_data (sum_rd_data[c])
    );
  end

  lp_csr #(
    .NUM_CH(NUM_CH), .COEF_W(COEF_W), .P(P), .D(D), .ACC_W(ACC_W)
  ) u_csr (
    .clk, .rst_n,
    .avs_address, .avs_write, .avs_writedata, .avs_read,
    .avs_readdata, .avs_readdatavalid,
    .cov_start, .coef_wr_en, .coef_commit, .coef_idx, .coef_wr_data, .sum_idx,
    .cov_busy, .cov_done,
    .clip(pred_sat | clean_sat),
    .coef_rd_data, .sum_rd_data
  );

  assign irq = |cov_done;

endmodule
