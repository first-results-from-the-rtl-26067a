// lp_coef_bank -- coefficient registers of the LP FIR filter.
//
// The processor computes P linear-prediction coefficients and writes them
// here one at a time (wr_en, wr_idx, wr_data) into a shadow set; a commit
// pulse copies the whole shadow set into the active set, which drives the
// predictor, in a single clock. The filter thus switches from the old to
// the new coefficients between two samples and never runs on a mixed set.
// A write and a commit in the same cycle commit the set including the new
// value. The shadow set can be read back (rd_idx -> rd_data, combinational).
// Reset clears both sets, so the prediction is zero and the clean trace
// equals the raw trace until coefficients have been loaded.
//
// Taken from the published filter description: coefficients transferred from
// the processor "updating appropriate registers", 14-bit width, P = 32.
// Choices made in this design: the shadow/active double buffering, reset to
// zero.
module lp_coef_bank #(
  parameter int unsigned COEF_W = 14,
  parameter int unsigned P      = 32,
  localparam int unsigned IW    = (P > 1) ? $clog2(P) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [IW-1:0]             wr_idx,
  input  logic signed [COEF_W-1:0]  wr_data,
  input  logic                      commit,
  input  logic [IW-1:0]             rd_idx,
  output logic signed [COEF_W-1:0]  rd_data,
  output logic signed [COEF_W-1:0]  coefs [P]
);

  logic signed [COEF_W-1:0] shadow      [P];
  logic signed [COEF_W-1:0] shadow_next [P];

  always_comb begin
    for (int k = 0; k < P; k++) shadow_next[k] = shadow[k];
    if (wr_en && (int'(wr_idx) < P)) shadow_next[wr_idx] = wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < P; k++) begin
        shadow[k] <= '0;
        coefs[k]  <= '0;
      end
    end else begin
      for (int k = 0; k < P; k++) shadow[k] <= shadow_next[k];
      if (commit)
        for (int k = 0; k < P; k++) coefs[k] <= shadow_next[k];
    end
  end

  assign rd_data = (int'(rd_idx) < P) ? shadow[rd_idx] : '0;

endmodule
