// tb_lp_csr -- self-checking test of lp_csr (the processor bus slave).
//
// The channel side is modelled in the testbench: the read-back values are
// fixed functions of the decoded index and channel, so any wrong decode or
// wrong channel shows up. Checks: the strobes of CTRL and coefficient
// writes reach only the addressed channel with the right index and data;
// STATUS, PARAMS, coefficient and 38-bit sum words (low/high, sign
// extension) read back one clock after avs_read; the clip flag is sticky
// and cleared by reading STATUS.
module tb_lp_csr;
  import lp_pkg::*;
  localparam int unsigned NUM_CH = 2;
  localparam int unsigned COEF_W = 14;
  localparam int unsigned P      = 32;
  localparam int unsigned D      = 128;
  localparam int unsigned ACC_W  = 38;
  localparam int unsigned AW     = 1 + REG_AW;
  localparam int unsigned IW     = $clog2(P);
  localparam int unsigned RW     = $clog2(2*P);

  logic clk = 1'b0;
  logic rst_n;
  logic [AW-1:0] avs_address;
  logic avs_write, avs_read, avs_readdatavalid;
  logic [31:0] avs_writedata, avs_readdata;
  logic [NUM_CH-1:0] cov_start, coef_wr_en, coef_commit, cov_busy, cov_done, clip;
  logic [IW-1:0] coef_idx;
  logic signed [COEF_W-1:0] coef_wr_data;
  logic [RW-1:0] sum_idx;
  logic signed [COEF_W-1:0] coef_rd_data [NUM_CH];
  logic signed [ACC_W-1:0]  sum_rd_data  [NUM_CH];

  int checks = 0, failures = 0;

  lp_csr #(.NUM_CH(NUM_CH), .COEF_W(COEF_W), .P(P), .D(D), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  // channel-side model: values depend on channel and index
  function automatic logic signed [COEF_W-1:0] coef_val(int c, int k);
    return COEF_W'(k * 37 - 500 + c * 1000);
  endfunction
  function automatic logic signed [ACC_W-1:0] sum_val(int c, int j);
    return ACC_W'((longint'(j) - 20) * 64'sd3000000007 + longint'(c) * 123456789);
  endfunction
  always_comb
    for (int c = 0; c < NUM_CH; c++) begin
      coef_rd_data[c] = coef_val(c, int'(coef_idx));
      sum_rd_data[c]  = sum_val(c, int'(sum_idx));
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic bus_write(int c, logic [REG_AW-1:0] ra, logic [31:0] d);
    @(negedge clk);
    avs_address = {1'(c), ra}; avs_writedata = d; avs_write = 1'b1;
    #1;
    expect_eq("cov_start",   cov_start,   (ra == REG_CTRL && d[CTRL_START])  ? (1 << c) : 0);
    expect_eq("coef_commit", coef_commit, (ra == REG_CTRL && d[CTRL_COMMIT]) ? (1 << c) : 0);
    expect_eq("coef_wr_en",  coef_wr_en,  (ra >= REG_COEF && ra < REG_COEF + P) ? (1 << c) : 0);
    if (ra >= REG_COEF && ra < REG_COEF + P) begin
      expect_eq("coef_idx",  coef_idx, ra - REG_COEF);
      expect_eq("coef_data", coef_wr_data, longint'($signed(d[COEF_W-1:0])));
    end
    @(negedge clk) avs_write = 1'b0;
  endtask

  task automatic bus_read(int c, logic [REG_AW-1:0] ra, output logic [31:0] d);
    @(negedge clk);
    avs_address = {1'(c), ra}; avs_read = 1'b1;
    @(negedge clk);
    avs_read = 1'b0;
    checks++;
    if (!avs_readdatavalid) failures++;
    d = avs_readdata;
    @(negedge clk);
    checks++;
    if (avs_readdatavalid) failures++;
  endtask

  initial begin
    logic [31:0] d, lo, hi;
    longint s;
    rst_n = 1'b0; avs_address = '0; avs_write = 0; avs_read = 0; avs_writedata = '0;
    cov_busy = '0; cov_done = '0; clip = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int c = 0; c < NUM_CH; c++) begin
      bus_write(c, REG_CTRL, 32'h1);
      bus_write(c, REG_CTRL, 32'h2);
      bus_write(c, REG_CTRL, 32'h3);
      for (int k = 0; k < int'(P); k += 5) bus_write(c, REG_COEF + k, $urandom);
      bus_write(c, REG_STATUS, 32'h3);       // read-only: no strobes
      bus_read(c, REG_PARAMS, d);
      expect_eq("params", d, {8'(COEF_W), 16'(D), 8'(P)});
      for (int k = 0; k < int'(P); k++) begin
        bus_read(c, REG_COEF + k, d);
        expect_eq("coef read", longint'($signed(d)), longint'(coef_val(c, k)));
      end
      for (int j = 0; j < 2*int'(P); j++) begin
        bus_read(c, REG_SUMS + 2*j, lo);
        bus_read(c, REG_SUMS + 2*j + 1, hi);
        s = longint'({hi, lo});
        expect_eq("sum read", s, longint'(sum_val(c, j)));
      end
    end

    // status bits and sticky clip flag
    @(negedge clk) begin cov_busy = 2'b01; cov_done = 2'b10; clip = 2'b10; end
    @(negedge clk) clip = 2'b00;
    bus_read(0, REG_STATUS, d);
    expect_eq("status ch0", d, 32'h1);
    bus_read(1, REG_STATUS, d);
    expect_eq("status ch1", d, 32'h6);
    bus_read(1, REG_STATUS, d);
    expect_eq("status ch1 after clear", d, 32'h2);
    bus_read(0, 10'h0AB, d);
    expect_eq("unmapped", d, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
