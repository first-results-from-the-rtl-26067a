// tb_lp_delay_line -- self-checking test of lp_delay_line.
//
// Drives random signed samples, one per clock, and keeps its own history of
// every sample sent. In each cycle it checks taps[k] == x[i-D-1-k] against
// that history (zero for samples from before reset), for a short line
// (D = 5, P = 4) and checks that reset clears the line. A watchdog ends the
// run with a failure if it hangs.
module tb_lp_delay_line;
  localparam int unsigned DATA_W = 14;
  localparam int unsigned D      = 5;
  localparam int unsigned P      = 4;
  localparam int unsigned NS     = 300;

  logic clk = 1'b0;
  logic rst_n;
  logic signed [DATA_W-1:0] x_in;
  logic signed [DATA_W-1:0] taps [P];

  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] hist [NS];

  lp_delay_line #(.DATA_W(DATA_W), .D(D), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [DATA_W-1:0] past(int idx);
    return (idx < 0) ? '0 : hist[idx];
  endfunction

  initial begin
    rst_n = 1'b0;
    x_in  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      x_in    = DATA_W'($urandom);
      hist[i] = x_in;
      #1;
      for (int k = 0; k < P; k++) begin
        checks++;
        if (taps[k] !== past(i - int'(D) - 1 - k)) begin
          failures++;
          if (failures < 10)
            $display("i=%0d tap %0d = %0d, expected %0d", i, k, taps[k], past(i - int'(D) - 1 - k));
        end
      end
    end
    // reset clears the line
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < P; k++) begin
      checks++;
      if (taps[k] !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
