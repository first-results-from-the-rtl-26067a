// tb_lp_covariance -- self-checking test of lp_covariance.
//
// A delay line (D = 6, P = 4) feeds the unit with random samples, as in a
// filter channel. The testbench keeps every sample and computes
// R[l] = sum x[n-D-1]x[n-D-1-l] and C[k] = sum x[n]x[n-D-1-k] over the
// N_COV samples that follow the start pulse, then checks all 2P sums, that
// done rises exactly N_COV+2 clocks after start, that busy covers the run,
// and that a start during a run is ignored. Full-scale samples are included
// to exercise the accumulator width. Several runs back to back.
module tb_lp_covariance;
  localparam int unsigned DATA_W = 14;
  localparam int unsigned D      = 6;
  localparam int unsigned P      = 4;
  localparam int unsigned N_COV  = 1024;
  localparam int unsigned ACC_W  = 2*DATA_W + $clog2(N_COV);
  localparam int unsigned RW     = $clog2(2*P);
  localparam int unsigned NMAX   = 8000;

  logic clk = 1'b0;
  logic rst_n;
  logic signed [DATA_W-1:0] x_in;
  logic signed [DATA_W-1:0] taps [P];
  logic start, busy, done;
  logic [RW-1:0] rd_idx;
  logic signed [ACC_W-1:0] rd_data;

  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] hist [NMAX];
  int n_sent = 0;

  lp_delay_line #(.DATA_W(DATA_W), .D(D), .P(P)) u_dl (.clk, .rst_n, .x_in, .taps);
  lp_covariance #(.DATA_W(DATA_W), .P(P), .N_COV(N_COV)) dut (
    .clk, .rst_n, .x_cur(x_in), .taps, .start, .busy, .done, .rd_idx, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (NMAX) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint past(int idx);
    return (idx < 0) ? 0 : longint'(hist[idx]);
  endfunction

  // new sample each negedge
  task automatic step(bit st, bit big);
    @(negedge clk);
    start = st;
    x_in  = big ? ($urandom % 2 == 1 ? DATA_W'(-(1 << (DATA_W-1))) : DATA_W'((1 << (DATA_W-1)) - 1))
                : DATA_W'($urandom);
    hist[n_sent] = x_in;
    n_sent++;
  endtask

  task automatic run(bit big, bit restart_mid);
    int first, cycles;
    longint r;
    step(1'b1, big);               // start presented with this sample
    first = n_sent;                // first sample accumulated is the next one
    cycles = 0;
    do begin
      step(restart_mid && cycles == 100, big);
      cycles++;
      checks++;
      if (!done && !busy) begin failures++; $display("busy low during run"); end
    end while (!done && cycles < 5000);
    step(1'b0, big);               // keeps the sample history in step
    checks++;
    // cycles counts the negedges after the start edge until done was seen
    if (cycles != int'(N_COV) + 2) begin
      failures++;
      $display("done after %0d cycles, expected %0d", cycles, N_COV + 2);
    end
    for (int j = 0; j < 2*int'(P); j++) begin
      r = 0;
      for (int n = first; n < first + int'(N_COV); n++)
        if (j < int'(P)) r += past(n - int'(D) - 1) * past(n - int'(D) - 1 - j);
        else             r += past(n) * past(n - int'(D) - 1 - (j - int'(P)));
      rd_idx = RW'(j);
      #1;
      checks++;
      if (longint'(rd_data) != r) begin
        failures++;
        if (failures < 10) $display("sum %0d = %0d expected %0d", j, rd_data, r);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; x_in = '0; start = 1'b0; rd_idx = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    checks++;
    if (busy || done) failures++;
    for (int i = 0; i < 20; i++) step(1'b0, 1'b0);
    run(1'b0, 1'b0);
    run(1'b1, 1'b1);
    for (int i = 0; i < 7; i++) step(1'b0, 1'b0);
    run(1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
