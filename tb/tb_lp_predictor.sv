// tb_lp_predictor -- self-checking test of lp_predictor.
//
// Streams a new random tap vector every clock through an 8-tap predictor
// (and the default 32-tap one) with random coefficients, computes the
// expected rounded and clipped dot product in the testbench, and checks
// each result exactly lp_pkg::pred_latency(P) clocks after its taps went in.
// Large coefficients make the output clip in both directions.
module tb_lp_predictor;
  import lp_pkg::*;
  localparam int unsigned DATA_W    = 14;
  localparam int unsigned COEF_W    = 14;
  localparam int unsigned COEF_FRAC = 12;
  localparam int unsigned P         = 32;
  localparam int unsigned LAT       = pred_latency(P);
  localparam int unsigned NS        = 3000;
  localparam int MAXV = (1 << (DATA_W-1)) - 1;
  localparam int MINV = -(1 << (DATA_W-1));

  logic clk = 1'b0;
  logic rst_n;
  logic signed [DATA_W-1:0] taps  [P];
  logic signed [COEF_W-1:0] coefs [P];
  logic signed [DATA_W-1:0] pred;
  logic pred_sat;

  int checks = 0, failures = 0, nsat = 0;
  int expq [$];
  bit exps [$];

  lp_predictor #(.DATA_W(DATA_W), .COEF_W(COEF_W), .COEF_FRAC(COEF_FRAC), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NS + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void model(output int e, output bit es);
    longint acc = 0;
    longint q;
    for (int k = 0; k < P; k++) acc += longint'(taps[k]) * longint'(coefs[k]);
    q  = (acc + (longint'(1) << (COEF_FRAC-1))) >>> COEF_FRAC;
    es = 1'b0;
    if (q > MAXV) begin q = MAXV; es = 1'b1; end
    if (q < MINV) begin q = MINV; es = 1'b1; end
    e = int'(q);
  endfunction

  initial begin
    int e;
    bit es;
    rst_n = 1'b0;
    for (int k = 0; k < P; k++) begin taps[k] = '0; coefs[k] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < NS; n++) begin
      // change coefficients now and then; small ones most of the time
      if (n % 200 == 0)
        for (int k = 0; k < P; k++)
          coefs[k] = (n % 400 == 0) ? COEF_W'($urandom) : COEF_W'($signed(10'($urandom)));
      for (int k = 0; k < P; k++) taps[k] = DATA_W'($urandom);
      model(e, es);
      expq.push_back(e);
      exps.push_back(es);
      @(negedge clk);
      if (n >= int'(LAT) - 1) begin
        e  = expq.pop_front();
        es = exps.pop_front();
        checks++;
        if (int'(pred) != e || pred_sat != es) begin
          failures++;
          if (failures < 10) $display("n=%0d pred=%0d sat=%0b expected %0d %0b", n, pred, pred_sat, e, es);
        end
        if (es) nsat++;
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("no clipping seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
