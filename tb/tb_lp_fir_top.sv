// tb_lp_fir_top -- end-to-end test of lp_fir_top at its default size
// (2 channels, P = 32, D = 128, 14-bit samples and coefficients, 1024-sample
// covariance blocks).
//
// Each channel is fed a synthetic antenna trace: channel 0 one strong
// carrier (27.12 MHz at 200 MS/s), channel 1 two carriers (27.12 and
// 57.9 MHz, 4:1 in amplitude), both with a little white noise. The
// testbench plays the processor: over the bus it starts a covariance run on
// both channels, polls STATUS, reads the 2P sums, solves the normal
// equations R a = C by Gaussian elimination in floating point, rounds the
// coefficients to Q2.12, writes them and commits them.
//
// Checks:
//  * every clean output sample, bit for bit, against a model of the filter
//    (x[i] - clip(round(sum a_k x[i-D-1-k] / 4096)), clipped), which also
//    checks the latency of pred_latency(P)+1 clocks; samples near a commit
//    are skipped, since the switch-over instant is not modelled;
//  * the carrier power drops by a set factor after the update;
//  * a single-sample pulse added after the update passes unaltered apart
//    from the residual of the carriers (the gap of D samples);
//  * covariance sums read over the bus equal sums the testbench forms
//    from its own copy of the samples;
//  * irq, busy, done and a start during a run (ignored);
//  * oversized coefficients make prediction and output clip, and the
//    sticky clip bit in STATUS reports it.
// Each of these mechanisms is counted; one that never happened is a failure.
module tb_lp_fir_top;
  import lp_pkg::*;
  localparam int unsigned NUM_CH = 2;
  localparam int unsigned DATA_W = 14;
  localparam int unsigned COEF_W = 14;
  localparam int unsigned FRAC   = 12;
  localparam int unsigned P      = 32;
  localparam int unsigned D      = 128;
  localparam int unsigned N_COV  = 1024;
  localparam int unsigned LAT    = pred_latency(P) + 1;
  localparam int unsigned AW     = 1 + REG_AW;
  localparam int unsigned NMAX   = 20000;
  localparam real PI = 3.14159265358979;
  localparam int MAXV = (1 << (DATA_W-1)) - 1;
  localparam int MINV = -(1 << (DATA_W-1));

  logic clk = 1'b0;
  logic rst_n;
  logic signed [DATA_W-1:0] adc_data   [NUM_CH];
  logic signed [DATA_W-1:0] clean_data [NUM_CH];
  logic [NUM_CH-1:0] clean_sat;
  logic [AW-1:0] avs_address;
  logic avs_write, avs_read, avs_readdatavalid, irq;
  logic [31:0] avs_writedata, avs_readdata;

  lp_fir_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // sample history and the coefficient model, per channel
  int hist [NUM_CH][NMAX];
  int coef_model [NUM_CH][P];
  int n_smp = 0;                 // index of the next sample to drive
  int skip_until = 0;            // do not compare outputs of samples below this
  int pulse_at = -1;             // sample index carrying a test pulse
  int pulse_amp = 3000;
  bit streaming = 1'b0;

  // mechanism counters
  int cnt_cov_runs = 0, cnt_busy_polls = 0, cnt_irq = 0, cnt_commit = 0;
  int cnt_pred_clip = 0, cnt_out_clip = 0, cnt_start_ignored = 0, cnt_pulse = 0;
  int cnt_cmp = 0;

  // power accumulators for the suppression measurement
  real pin [NUM_CH], pout [NUM_CH];
  bit  measure = 1'b0;

  function automatic int gen(int c, int n);
    real v;
    if (c == 0) v = 2000.0 * $sin(2.0*PI*27.12/200.0*n);
    else        v = 1600.0 * $sin(2.0*PI*27.12/200.0*n + 0.3) + 400.0 * $sin(2.0*PI*57.9/200.0*n + 1.1);
    v += real'(int'($urandom % 61) - 30);
    if (n == pulse_at) v += real'(pulse_amp);
    return int'(v);
  endfunction

  function automatic int clip14(longint v);
    if (v > MAXV) return MAXV;
    if (v < MINV) return MINV;
    return int'(v);
  endfunction

  function automatic int past(int c, int n);
    return (n < 0) ? 0 : hist[c][n];
  endfunction

  function automatic int model_y(int c, int i, output bit psat);
    longint acc = 0;
    longint q;
    for (int k = 0; k < int'(P); k++) acc += longint'(coef_model[c][k]) * past(c, i - int'(D) - 1 - k);
    q = (acc + (longint'(1) << (FRAC-1))) >>> FRAC;
    psat = (q > MAXV) || (q < MINV);
    return clip14(longint'(past(c, i)) - clip14(q));
  endfunction

  // sample stream and output checker
  always @(negedge clk) begin
    if (streaming) begin
      int i, e;
      bit psat;
      i = n_smp - int'(LAT);          // sample whose clean value is on the output now
      if (i >= 0 && i >= skip_until) begin
        for (int c = 0; c < NUM_CH; c++) begin
          e = model_y(c, i, psat);
          checks++;
          cnt_cmp++;
          if (int'(clean_data[c]) != e) begin
            failures++;
            if (failures < 10) $display("ch%0d sample %0d: clean=%0d expected %0d", c, i, clean_data[c], e);
          end
          if (psat) cnt_pred_clip++;
          if (clean_sat[c]) cnt_out_clip++;
          if (measure) begin
            pin[c]  += real'(past(c, i)) ** 2;
            pout[c] += real'(clean_data[c]) ** 2;
          end
          if (i == pulse_at && c == 0) begin
            // the pulse must come through on top of a small carrier residual
            checks++;
            cnt_pulse++;
            if (int'(clean_data[c]) < pulse_amp - 400 || int'(clean_data[c]) > pulse_amp + 400) begin
              failures++;
              $display("pulse: clean=%0d expected about %0d", clean_data[c], pulse_amp);
            end
          end
        end
      end
      for (int c = 0; c < NUM_CH; c++) begin
        hist[c][n_smp] = gen(c, n_smp);
        adc_data[c]    = DATA_W'(hist[c][n_smp]);
      end
      n_smp++;
    end
  end

  always @(posedge clk) if (irq) cnt_irq++;

  initial begin
    repeat (NMAX - 10) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- processor side ----------------
  // Bus signals change 1 time unit after the falling edge, so that the
  // sample stream (updated at the falling edge) is always ahead of them.
  task automatic bus_write(int c, logic [REG_AW-1:0] ra, logic [31:0] d);
    @(negedge clk) #1;
    avs_address = {1'(c), ra}; avs_writedata = d; avs_write = 1'b1;
    @(negedge clk) #1 avs_write = 1'b0;
  endtask

  task automatic bus_read(int c, logic [REG_AW-1:0] ra, output logic [31:0] d);
    @(negedge clk) #1;
    avs_address = {1'(c), ra}; avs_read = 1'b1;
    @(negedge clk) #1;
    avs_read = 1'b0;
    d = avs_readdata;
  endtask

  real R [NUM_CH][P];
  real C [NUM_CH][P];

  // start a run on both channels, wait for done, read and verify the sums
  task automatic covariance_run();
    logic [31:0] st, lo, hi;
    int first [NUM_CH];
    longint s, e;
    for (int c = 0; c < NUM_CH; c++) begin
      @(negedge clk) #1;
      avs_address = {1'(c), REG_CTRL}; avs_writedata = 32'h1; avs_write = 1'b1;
      first[c] = n_smp;               // the start edge sees sample n_smp-1; the run takes the next N_COV
      @(negedge clk) #1 avs_write = 1'b0;
    end
    // a second start during the run must be ignored
    bus_write(0, REG_CTRL, 32'h1);
    cnt_start_ignored++;
    for (int c = 0; c < NUM_CH; c++) begin
      do begin
        bus_read(c, REG_STATUS, st);
        if (st[0]) cnt_busy_polls++;
      end while (!st[1]);
    end
    cnt_cov_runs++;
    checks++;
    if (!irq) begin failures++; $display("irq low after covariance run"); end
    for (int c = 0; c < NUM_CH; c++) begin
      for (int j = 0; j < 2*int'(P); j++) begin
        bus_read(c, REG_SUMS + 2*j, lo);
        bus_read(c, REG_SUMS + 2*j + 1, hi);
        s = longint'({hi, lo});
        e = 0;
        for (int n = first[c]; n < first[c] + int'(N_COV); n++)
          if (j < int'(P)) e += longint'(past(c, n - int'(D) - 1)) * past(c, n - int'(D) - 1 - j);
          else             e += longint'(past(c, n)) * past(c, n - int'(D) - 1 - (j - int'(P)));
        checks++;
        if (s != e) begin
          failures++;
          if (failures < 10) $display("ch%0d sum %0d = %0d expected %0d", c, j, s, e);
        end
        if (j < int'(P)) R[c][j] = real'(s);
        else             C[c][j - int'(P)] = real'(s);
      end
    end
  endtask

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // solve the Toeplitz system R a = C by Gaussian elimination with pivoting
  task automatic solve_normal_eq(int c, output int q [P]);
    real A [P][P+1];
    real a [P];
    real t, f;
    int piv;
    for (int r = 0; r < int'(P); r++) begin
      for (int k = 0; k < int'(P); k++) A[r][k] = R[c][(r > k) ? r - k : k - r];
      A[r][r] += 1.0e-2 * R[c][0];     // diagonal loading keeps |a_k| inside the Q2.12 range
      A[r][P] = C[c][r];
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
      longint v = longint'($floor(a[k] * (2.0 ** FRAC) + 0.5));
      if (v > (1 << (COEF_W-1)) - 1) v = (1 << (COEF_W-1)) - 1;
      if (v < -(1 << (COEF_W-1)))    v = -(1 << (COEF_W-1));
      q[k] = int'(v);
    end
  endtask

  task automatic load_coefs(int c, int q [P]);
    for (int k = 0; k < int'(P); k++) bus_write(c, REG_COEF + k, 32'(q[k]));
    @(negedge clk) #1;
    avs_address = {1'(c), REG_CTRL}; avs_writedata = 32'h2; avs_write = 1'b1;
    @(negedge clk) #1 avs_write = 1'b0;
    // the new set takes over at the commit edge; skip the samples around it
    skip_until = n_smp + int'(D) + int'(P) + 4;
    for (int k = 0; k < int'(P); k++) coef_model[c][k] = q[k];
    cnt_commit++;
  endtask

  initial begin
    int q [P];
    logic [31:0] st;
    rst_n = 1'b0; avs_address = '0; avs_write = 0; avs_read = 0; avs_writedata = '0;
    for (int c = 0; c < NUM_CH; c++) begin
      adc_data[c] = '0; pin[c] = 0.0; pout[c] = 0.0;
      for (int k = 0; k < int'(P); k++) coef_model[c][k] = 0;
    end
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    streaming = 1'b1;

    // pass-through with the reset coefficients (all zero)
    repeat (400) @(negedge clk);
    checks++;
    if (irq) begin failures++; $display("irq high before any run"); end

    // adapt: covariances -> solve -> coefficients, both channels
    covariance_run();
    for (int c = 0; c < NUM_CH; c++) begin
      solve_normal_eq(c, q);
      load_coefs(c, q);
    end

    // measure the suppression over N_COV samples
    wait (n_smp > skip_until + 10);
    @(negedge clk) measure = 1'b1;
    repeat (N_COV) @(negedge clk);
    @(negedge clk) measure = 1'b0;
    for (int c = 0; c < NUM_CH; c++) begin
      $display("channel %0d: power in/out = %0.1f", c, pin[c] / pout[c]);
      checks++;
      if (pin[c] / pout[c] < 20.0) begin failures++; $display("channel %0d: suppression too small", c); end
    end

    // a short pulse passes through the filter
    pulse_at = n_smp + 20;
    repeat (60) @(negedge clk);

    // a second adaptation cycle with the filter running
    covariance_run();
    solve_normal_eq(0, q);
    load_coefs(0, q);
    repeat (300) @(negedge clk);

    // oversized coefficients: prediction and output clip
    bus_read(0, REG_STATUS, st);       // clear the sticky clip flag
    // +-2.0 in step with the carrier, so that the prediction adds up coherently
    for (int k = 0; k < int'(P); k++) q[k] = ($cos(2.0*PI*27.12/200.0*k) >= 0.0) ? 8191 : -8192;
    load_coefs(0, q);
    repeat (D + P + 50) @(negedge clk);
    bus_read(0, REG_STATUS, st);
    checks++;
    if (!st[2]) begin failures++; $display("clip flag not set"); end

    streaming = 1'b0;
    $display("mechanisms: cov_runs=%0d busy_polls=%0d irq_cycles=%0d commits=%0d start_ignored=%0d",
             cnt_cov_runs, cnt_busy_polls, cnt_irq, cnt_commit, cnt_start_ignored);
    $display("            pred_clip=%0d out_clip=%0d pulses=%0d compared=%0d",
             cnt_pred_clip, cnt_out_clip, cnt_pulse, cnt_cmp);
    if (cnt_cov_runs == 0)      begin failures++; $display("no covariance run"); end
    if (cnt_busy_polls == 0)    begin failures++; $display("busy never seen"); end
    if (cnt_irq == 0)           begin failures++; $display("irq never seen"); end
    if (cnt_commit == 0)        begin failures++; $display("no commit"); end
    if (cnt_start_ignored == 0) begin failures++; $display("no ignored start"); end
    if (cnt_pred_clip == 0)     begin failures++; $display("prediction never clipped"); end
    if (cnt_out_clip == 0)      begin failures++; $display("output never clipped"); end
    if (cnt_pulse == 0)         begin failures++; $display("pulse never checked"); end
    if (cnt_cmp < 1000)         begin failures++; $display("too few compared samples"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
