// tb_lp_subtract -- self-checking test of lp_subtract.
//
// Applies random and corner-case (x, pred) pairs and checks, one clock
// later, y = clip(x - pred) to the 14-bit signed range and the sat flag.
// Corner cases drive both saturation directions.
module tb_lp_subtract;
  localparam int unsigned DATA_W = 14;
  localparam int MAXV = (1 << (DATA_W-1)) - 1;
  localparam int MINV = -(1 << (DATA_W-1));

  logic clk = 1'b0;
  logic rst_n;
  logic signed [DATA_W-1:0] x, pred, y;
  logic sat;

  int checks = 0, failures = 0;
  int nsat_hi = 0, nsat_lo = 0;

  lp_subtract #(.DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int xv, int pv);
    int e;
    bit es;
    @(negedge clk);
    x    = DATA_W'(xv);
    pred = DATA_W'(pv);
    e    = xv - pv;
    es   = 1'b0;
    if (e > MAXV) begin e = MAXV; es = 1'b1; nsat_hi++; end
    if (e < MINV) begin e = MINV; es = 1'b1; nsat_lo++; end
    @(negedge clk);
    checks++;
    if (int'(y) != e || sat != es) begin
      failures++;
      if (failures < 10) $display("x=%0d pred=%0d: y=%0d sat=%0b, expected %0d %0b", xv, pv, y, sat, e, es);
    end
  endtask

  initial begin
    rst_n = 1'b0; x = '0; pred = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    apply(MAXV, MINV);
    apply(MINV, MAXV);
    apply(MAXV, -1);
    apply(MINV, 1);
    apply(0, 0);
    apply(100, 37);
    for (int n = 0; n < 2000; n++)
      apply(int'($signed(DATA_W'($urandom))), int'($signed(DATA_W'($urandom))));
    checks++;
    if (nsat_hi == 0 || nsat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
