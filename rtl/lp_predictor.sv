// lp_predictor -- the "Predict" step of the LP FIR filter.
//
// A P-tap FIR filter whose coefficients a_k are the linear-prediction
// coefficients computed by the processor:
//   pred = round( sum_{k=0}^{P-1} a_k * taps[k] / 2^COEF_FRAC )
// clipped to the DATA_W-bit signed range. With taps[k] = x[i-D-1-k] the
// result is the expected (periodic, interference) part of sample x[i].
//
// The filter is fully parallel and accepts a new tap vector every clock:
// stage 1 registers the P products, LEVELS = $clog2(P) registered levels of
// a binary adder tree (padded with zeros to a power of two) form the sum,
// and a last stage rounds half up, shifts and saturates. pred therefore
// appears lp_pkg::pred_latency(P) = LEVELS+2 clocks after its taps.
//
// Taken from the published filter description: the FIR filter fed by delayed
// samples, P = 32 stages and 14-bit coefficients of the deployed and lab-
// tested variants.
// Choices made in this design: the pipeline, the Q2.12 coefficient format
// (COEF_FRAC = 12), rounding and saturation.
module lp_predictor #(
  parameter int unsigned DATA_W    = 14,
  parameter int unsigned COEF_W    = 14,
  parameter int unsigned COEF_FRAC = 12,
  parameter int unsigned P         = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [DATA_W-1:0]  taps  [P],
  input  logic signed [COEF_W-1:0]  coefs [P],
  output logic signed [DATA_W-1:0]  pred,
  output logic                      pred_sat
);

  localparam int unsigned LEVELS = $clog2(P);
  localparam int unsigned NP     = 1 << LEVELS;
  localparam int unsigned PW     = DATA_W + COEF_W;      // product width
  localparam int unsigned SW     = PW + LEVELS;          // full sum width

  localparam logic signed [SW-1:0] MAXV = SW'((1 << (DATA_W-1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(1 << (DATA_W-1));
  localparam logic signed [SW-1:0] HALF = SW'(1) <<< (COEF_FRAC - 1);

  // tree[l][n]: node n of level l; level 0 holds the registered products.
  logic signed [SW-1:0] tree [LEVELS+1][NP];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int n = 0; n < NP; n++) tree[0][n] <= '0;
    end else begin
      for (int n = 0; n < NP; n++) begin
        if (n < P) tree[0][n] <= SW'(taps[n]) * SW'(coefs[n]);
        else       tree[0][n] <= '0;
      end
    end
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int n = 0; n < NP; n++) tree[l][n] <= '0;
      end else begin
        for (int n = 0; n < (NP >> l); n++)
          tree[l][n] <= tree[l-1][2*n] + tree[l-1][2*n+1];
        for (int n = (NP >> l); n < NP; n++)
          tree[l][n] <= '0;
      end
    end
  end

  logic signed [SW-1:0]     scaled;
  logic signed [DATA_W-1:0] pred_next;
  logic                     clip;

  always_comb begin
    scaled = (tree[LEVELS][0] + HALF) >>> COEF_FRAC;
    clip   = 1'b0;
    if (scaled > MAXV) begin
      pred_next = MAXV[DATA_W-1:0];
      clip      = 1'b1;
    end else if (scaled < MINV) begin
      pred_next = MINV[DATA_W-1:0];
      clip      = 1'b1;
    end else begin
      pred_next = scaled[DATA_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pred     <= '0;
      pred_sat <= 1'b0;
    end else begin
      pred     <= pred_next;
      pred_sat <= clip;
    end
  end

endmodule
