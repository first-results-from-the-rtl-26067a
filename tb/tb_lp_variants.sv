// tb_lp_variants -- the filter variants and laboratory signals of the
// published measurements, each run end to end (see lp_variant_run):
//   FIR64, D=128, 14-bit coefficients: one 50 MHz carrier at 250 MS/s and
//     the same carrier with Hi-Fi FM (75 kHz deviation, 15 kHz modulation);
//   FIR64, D=128, 18-bit coefficients and FIR48, 14-bit: carriers at
//     27.12 and 57.9 MHz, 4:1 in amplitude, with white noise;
//   FIR32 with D=1 and D=32: the same two carriers; D=1 must distort the
//     samples right after a pulse, D=32 must not.
// The suppression limits are set well below what the variants reach, to
// catch a broken filter rather than to grade it.
module tb_lp_variants;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NV = 6;
  logic fin [NV];
  int   chk [NV];
  int   fl  [NV];

  lp_variant_run #(.NAME("FIR64_14 mono"), .P(64), .D(128), .COEF_W(14), .COEF_FRAC(12),
                   .SIG(0), .FS_MHZ(250.0), .FREQ_MHZ(50.0), .MIN_SUPP(100.0))
    v0 (.clk, .rst_n, .finished(fin[0]), .checks(chk[0]), .failures(fl[0]));
  lp_variant_run #(.NAME("FIR64_14 FM"), .P(64), .D(128), .COEF_W(14), .COEF_FRAC(12),
                   .SIG(1), .FS_MHZ(250.0), .FREQ_MHZ(50.0), .MIN_SUPP(10.0))
    v1 (.clk, .rst_n, .finished(fin[1]), .checks(chk[1]), .failures(fl[1]));
  lp_variant_run #(.NAME("FIR64_18 two carriers"), .P(64), .D(128), .COEF_W(18), .COEF_FRAC(16),
                   .SIG(2), .FS_MHZ(250.0), .FREQ_MHZ(27.12), .MIN_SUPP(5.0))
    v2 (.clk, .rst_n, .finished(fin[2]), .checks(chk[2]), .failures(fl[2]));
  lp_variant_run #(.NAME("FIR48_14 two carriers"), .P(48), .D(128), .COEF_W(14), .COEF_FRAC(12),
                   .SIG(2), .FS_MHZ(250.0), .FREQ_MHZ(27.12), .MIN_SUPP(5.0))
    v3 (.clk, .rst_n, .finished(fin[3]), .checks(chk[3]), .failures(fl[3]));
  lp_variant_run #(.NAME("FIR32_14 D=1"), .P(32), .D(1), .COEF_W(14), .COEF_FRAC(12),
                   .SIG(2), .FS_MHZ(200.0), .FREQ_MHZ(27.12), .MIN_SUPP(5.0))
    v4 (.clk, .rst_n, .finished(fin[4]), .checks(chk[4]), .failures(fl[4]));
  lp_variant_run #(.NAME("FIR32_14 D=32"), .P(32), .D(32), .COEF_W(14), .COEF_FRAC(12),
                   .SIG(2), .FS_MHZ(200.0), .FREQ_MHZ(27.12), .MIN_SUPP(5.0))
    v5 (.clk, .rst_n, .finished(fin[5]), .checks(chk[5]), .failures(fl[5]));

  int checks, failures;

  initial begin
    repeat (30000) @(posedge clk);
    checks = 0; failures = 1;
    for (int v = 0; v < NV; v++) begin checks += chk[v]; failures += fl[v]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    do begin
      @(posedge clk);
      all = 1'b1;
      for (int v = 0; v < NV; v++) all &= fin[v];
    end while (!all);
    checks = 0; failures = 0;
    for (int v = 0; v < NV; v++) begin checks += chk[v]; failures += fl[v]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
