// lp_covariance -- the "Update Covariances" step of the LP FIR filter.
//
// To find the prediction coefficients the processor solves the normal
// equations  sum_k a_k R[|j-k|] = C[j],  j = 0..P-1, where, over a block of
// N_COV samples,
//   R[l] = sum_n x[n-D-1] * x[n-D-1-l]   (l = 0..P-1, Toeplitz matrix)
//   C[k] = sum_n x[n]     * x[n-D-1-k]   (k = 0..P-1, right-hand side).
// Both are formed from the taps of the filter's own delay line
// (taps[k] = x[n-D-1-k]) and the current sample x_cur = x[n], with 2P
// multiply-accumulators running at one sample per clock.
//
// Handshake: a one-cycle start pulse (ignored while busy) clears the sums
// and raises busy. The samples presented in the N_COV cycles that follow
// the start cycle are multiplied (one register stage) and accumulated; done
// rises, and busy falls, N_COV+2 cycles after start. The sums stay
// readable until the next start: rd_idx 0..P-1 selects R[rd_idx], P..2P-1
// selects C[rd_idx-P] (rd_data combinational, ACC_W-bit signed).
//
// Taken from the published filter description: the covariances of 1024
// samples are computed in the FPGA logic and the equations are solved by a
// processor. Own choices: the autocorrelation (Toeplitz) form of the sums,
// sharing the predictor's delay line, the handshake and the unscaled 38-bit
// sums.
module lp_covariance #(
  parameter int unsigned DATA_W = 14,
  parameter int unsigned P      = 32,
  parameter int unsigned N_COV  = 1024,
  parameter int unsigned ACC_W  = 2*DATA_W + $clog2(N_COV),
  localparam int unsigned RW    = $clog2(2*P)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  x_cur,
  input  logic signed [DATA_W-1:0]  taps [P],
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  input  logic [RW-1:0]             rd_idx,
  output logic signed [ACC_W-1:0]   rd_data
);

  localparam int unsigned PW = 2*DATA_W;
  localparam int unsigned CW = $clog2(N_COV + 1);

  logic signed [PW-1:0]    prod [2*P];   // registered products
  logic signed [ACC_W-1:0] acc  [2*P];   // R[0..P-1], then C[0..P-1]
  logic                    prod_v;
  logic [CW-1:0]           cnt;
  logic                    take;

  assign take = busy && (cnt < CW'(N_COV));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      prod_v <= 1'b0;
      cnt    <= '0;
      for (int j = 0; j < 2*P; j++) begin
        prod[j] <= '0;
        acc[j]  <= '0;
      end
    end else if (start && !busy) begin
      busy   <= 1'b1;
      done   <= 1'b0;
      prod_v <= 1'b0;
      cnt    <= '0;
      for (int j = 0; j < 2*P; j++) acc[j] <= '0;
    end else if (busy) begin
      prod_v <= take;
      if (take) begin
        cnt <= cnt + 1'b1;
        for (int l = 0; l < P; l++) begin
          prod[l]   <= PW'(taps[0]) * PW'(taps[l]);
          prod[P+l] <= PW'(x_cur)   * PW'(taps[l]);
        end
      end
      if (prod_v)
        for (int j = 0; j < 2*P; j++) acc[j] <= acc[j] + ACC_W'(prod[j]);
      if (!take && prod_v) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign rd_data = (int'(rd_idx) < 2*P) ? acc[rd_idx] : '0;

  // A start pulse that arrives during a run is dropped; report it.
  a_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $warning("lp_covariance: start ignored while busy");

endmodule
