// lp_variant_run -- one end-to-end run of a single-channel lp_fir_top in a
// chosen configuration, used by tb_lp_variants.
//
// It feeds the filter a synthetic trace, plays the processor (covariance
// run, floating-point solve of the Toeplitz normal equations, rounding of
// the coefficients to COEF_W bits with COEF_FRAC fraction bits, load and
// commit), then
//  * measures the power suppression over N_COV samples and checks it
//    against MIN_SUPP;
//  * adds a single-sample pulse and measures the largest output excursion
//    in the 16 samples after it, relative to the residual RMS before it.
//    With D < 16 the pulse reappears, scaled by the coefficients, inside
//    that window (signal distortion); with D >= 16 it must not.
// Signals (SIG): 0 one carrier; 1 the same carrier frequency-modulated
// (75 kHz deviation, 15 kHz modulation); 2 two carriers 4:1 in amplitude
// with white noise. FREQ_MHZ and FS_MHZ set carrier and sampling rate.
// Results come out as check and failure counts once `finished` is high.
module lp_variant_run
  import lp_pkg::*;
#(
  parameter string       NAME      = "variant",
  parameter int unsigned P         = 64,
  parameter int unsigned D         = 128,
  parameter int unsigned COEF_W    = 14,
  parameter int unsigned COEF_FRAC = 12,
  parameter int          SIG       = 0,
  parameter real         FS_MHZ    = 250.0,
  parameter real         FREQ_MHZ  = 50.0,
  parameter real         MIN_SUPP  = 10.0
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned DATA_W = 14;
  localparam int unsigned N_COV  = 1024;
  localparam int unsigned AW     = 1 + REG_AW;
  localparam int unsigned NMAX   = 12000;
  localparam real PI = 3.14159265358979;

  logic signed [DATA_W-1:0] adc_data   [1];
  logic signed [DATA_W-1:0] clean_data [1];
  logic [0:0] clean_sat;
  logic [AW-1:0] avs_address;
  logic avs_write, avs_read, avs_readdatavalid, irq;
  logic [31:0] avs_writedata, avs_readdata;

  lp_fir_top #(.NUM_CH(1), .DATA_W(DATA_W), .COEF_W(COEF_W), .COEF_FRAC(COEF_FRAC),
               .P(P), .D(D), .N_COV(N_COV)) dut (.*);

  localparam int unsigned LAT = pred_latency(P) + 1;

  int  n_smp = 0;
  int  pulse_at = -1;
  int  hist [NMAX];
  bit  streaming = 1'b0;
  bit  measure = 1'b0, watch = 1'b0;
  real pin = 0.0, pout = 0.0, res2 = 0.0, peak = 0.0;
  int  nres = 0;

  function automatic int gen(int n);
    real t, v;
    t = real'(n) / FS_MHZ;            // microseconds
    case (SIG)
      0: v = 2000.0 * $sin(2.0*PI*FREQ_MHZ*t);
      1: v = 2000.0 * $sin(2.0*PI*FREQ_MHZ*t + (75.0/15.0) * $sin(2.0*PI*0.015*t));
      default: v = 800.0 * $sin(2.0*PI*FREQ_MHZ*t) + 200.0 * $sin(2.0*PI*57.9*t + 0.7)
                   + real'(int'($urandom % 81) - 40);
    endcase
    if (n == pulse_at) v += 3000.0;
    return int'(v);
  endfunction

  // sample stream; output of sample i is seen LAT clocks after it was driven
  always @(negedge clk) begin
    if (streaming) begin
      int i;
      real y;
      i = n_smp - int'(LAT);
      if (i >= 0) begin
        y = real'(clean_data[0]);
        if (measure) begin
          pin  += real'(hist[i]) ** 2;
          pout += y ** 2;
        end
        if (pulse_at > 0 && i < pulse_at && i >= pulse_at - 200) begin
          res2 += y ** 2;
          nres++;
        end
        if (pulse_at > 0 && i > pulse_at && i <= pulse_at + 16)
          if ((y < 0.0 ? -y : y) > peak) peak = (y < 0.0 ? -y : y);
      end
      hist[n_smp] = gen(n_smp);
      adc_data[0] = DATA_W'(hist[n_smp]);
      n_smp++;
    end
  end

  task automatic bus_write(logic [REG_AW-1:0] ra, logic [31:0] d);
    @(negedge clk) #1;
    avs_address = {1'b0, ra}; avs_writedata = d; avs_write = 1'b1;
    @(negedge clk) #1 avs_write = 1'b0;
  endtask

  task automatic bus_read(logic [REG_AW-1:0] ra, output logic [31:0] d);
    @(negedge clk) #1;
    avs_address = {1'b0, ra}; avs_read = 1'b1;
    @(negedge clk) #1;
    avs_read = 1'b0;
    d = avs_readdata;
  endtask

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  real R [P];
  real C [P];
  int  q [P];

  task automatic adapt();
    logic [31:0] st, lo, hi;
    real A [P][P+1];
    real a [P];
    real t, f;
    int piv;
    bus_write(REG_CTRL, 32'h1);
    do bus_read(REG_STATUS, st); while (!st[1]);
    for (int j = 0; j < 2*int'(P); j++) begin
      bus_read(REG_SUMS + 2*j, lo);
      bus_read(REG_SUMS + 2*j + 1, hi);
      if (j < int'(P)) R[j] = real'(longint'({hi, lo}));
      else             C[j - int'(P)] = real'(longint'({hi, lo}));
    end
    for (int r = 0; r < int'(P); r++) begin
      for (int k = 0; k < int'(P); k++) A[r][k] = R[(r > k) ? r - k : k - r];
      A[r][r] += 1.0e-2 * R[0];     // diagonal loading keeps |a_k| inside the Q2.12 range
      A[r][P] = C[r];
    end
    for (int col = 0; col < int'(P); col++) begin
      piv = col;
      for (int r = col + 1; r < int'(P); r++) if (rabs(A[r][col]) > rabs(A[piv][col])) piv = r;
      for (int k = 0; k <= int'(P); k++) begin t = A[col][k]; A[col][k] = A[piv][k]; A[piv][k] = t; end
      for (int r = col + 1; r < int'(P); r++) begin
        f = A[r][col] / A[col][col];
        for (int k = col; k <= int'(P); k++) A[r][k] -= f * A[col][k];
      end
    end
    for (int r = int'(P) - 1; r >= 0; r--) begin
      t = A[r][P];
      for (int k = r + 1; k < int'(P); k++) t -= A[r][k] * a[k];
      a[r] = t / A[r][r];
    end
    for (int k = 0; k < int'(P); k++) begin
      longint v = longint'($floor(a[k] * (2.0 ** COEF_FRAC) + 0.5));
      if (v > (longint'(1) << (COEF_W-1)) - 1) v = (longint'(1) << (COEF_W-1)) - 1;
      if (v < -(longint'(1) << (COEF_W-1)))    v = -(longint'(1) << (COEF_W-1));
      q[k] = int'(v);
      bus_write(REG_COEF + k, 32'(q[k]));
    end
    bus_write(REG_CTRL, 32'h2);
  endtask

  initial begin
    real supp, rms;
    finished = 1'b0; checks = 0; failures = 0;
    avs_address = '0; avs_write = 0; avs_read = 0; avs_writedata = '0; adc_data[0] = '0;
    @(posedge rst_n);
    @(negedge clk);
    streaming = 1'b1;
    repeat (D + P + 200) @(negedge clk);
    adapt();
    repeat (D + P + LAT + 10) @(negedge clk);
    measure = 1'b1;
    repeat (N_COV) @(negedge clk);
    measure = 1'b0;
    supp = pin / pout;
    checks++;
    if (supp < MIN_SUPP) begin
      failures++;
      $display("%s: suppression %0.1f below %0.1f", NAME, supp, MIN_SUPP);
    end
    // pulse response
    pulse_at = n_smp + 220;
    repeat (220 + LAT + 40) @(negedge clk);
    rms = $sqrt(res2 / real'(nres));
    checks++;
    if (D < 16) begin
      if (peak < 6.0 * rms + 100.0) begin
        failures++;
        $display("%s: no distortion after the pulse, although D=%0d", NAME, D);
      end
    end else if (peak > 6.0 * rms + 100.0) begin
      failures++;
      $display("%s: pulse distorted the following samples, although D=%0d", NAME, D);
    end
    $display("%s: P=%0d D=%0d coef %0d bits, power in/out %0.1f, residual rms %0.1f, peak after pulse %0.1f",
             NAME, P, D, COEF_W, supp, rms, peak);
    streaming = 1'b0;
    finished = 1'b1;
  end
endmodule
