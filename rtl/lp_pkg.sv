// lp_pkg -- constants shared by the linear-prediction (LP) FIR filter.
//
// The filter removes narrow-band radio interference from an ADC trace by
// predicting each sample from older samples and subtracting the prediction.
// This package holds the pipeline-latency formula of the predictor and the
// register map of the processor bus slave. The register map is this
// design's own choice; the underlying method follows the LP filter
// publication for the AERA radio stations.
package lp_pkg;

  // Latency of lp_predictor in clock cycles: one multiplier stage, one
  // stage per adder-tree level, one rounding/saturation stage.
  function automatic int unsigned pred_latency(int unsigned p);
    return $clog2(p) + 2;
  endfunction

  // Register map, 32-bit word addresses within one channel (10 bits).
  // The channel number sits above these bits.
  localparam int unsigned REG_AW = 10;

  localparam logic [REG_AW-1:0] REG_CTRL   = 10'h000; // W: bit0 start covariance run, bit1 commit coefficients
  localparam logic [REG_AW-1:0] REG_STATUS = 10'h001; // R: bit0 busy, bit1 done, bit2 prediction or output clipped since last read
  localparam logic [REG_AW-1:0] REG_PARAMS = 10'h002; // R: [7:0] P, [23:8] D, [31:24] COEF_W
  localparam logic [REG_AW-1:0] REG_COEF   = 10'h100; // R/W: 0x100+k shadow coefficient k
  localparam logic [REG_AW-1:0] REG_SUMS   = 10'h200; // R: 0x200+2j low word, 0x201+2j high word of sum j

  localparam int unsigned CTRL_START  = 0;
  localparam int unsigned CTRL_COMMIT = 1;

endpackage
