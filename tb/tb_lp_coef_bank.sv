// tb_lp_coef_bank -- self-checking test of lp_coef_bank.
//
// Keeps a model of the shadow and active coefficient sets. Writes random
// coefficients, reads the shadow set back, checks that the active set does
// not move until a commit, that a commit moves all P coefficients in one
// clock, and that a write in the commit cycle is included.
module tb_lp_coef_bank;
  localparam int unsigned COEF_W = 14;
  localparam int unsigned P      = 32;
  localparam int unsigned IW     = $clog2(P);

  logic clk = 1'b0;
  logic rst_n;
  logic wr_en, commit;
  logic [IW-1:0] wr_idx, rd_idx;
  logic signed [COEF_W-1:0] wr_data, rd_data;
  logic signed [COEF_W-1:0] coefs [P];

  logic signed [COEF_W-1:0] m_shadow [P];
  logic signed [COEF_W-1:0] m_active [P];
  int checks = 0, failures = 0;

  lp_coef_bank #(.COEF_W(COEF_W), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k < P; k++) begin
      checks++;
      if (coefs[k] !== m_active[k]) begin
        failures++;
        if (failures < 10) $display("active[%0d]=%0d expected %0d", k, coefs[k], m_active[k]);
      end
      rd_idx = IW'(k);
      #1;
      checks++;
      if (rd_data !== m_shadow[k]) begin
        failures++;
        if (failures < 10) $display("shadow[%0d]=%0d expected %0d", k, rd_data, m_shadow[k]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 0; commit = 0; wr_idx = '0; rd_idx = '0; wr_data = '0;
    for (int k = 0; k < P; k++) begin m_shadow[k] = '0; m_active[k] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check_all();
    for (int round = 0; round < 20; round++) begin
      // a batch of random writes, active set must not change
      for (int n = 0; n < 2*P; n++) begin
        @(negedge clk);
        wr_en   = 1'b1;
        wr_idx  = IW'($urandom);
        wr_data = COEF_W'($urandom);
        commit  = (n == 2*P-1) && (round % 2 == 1);  // commit together with last write
        m_shadow[wr_idx] = wr_data;
        @(negedge clk);
        wr_en  = 1'b0;
        if (commit) for (int k = 0; k < P; k++) m_active[k] = m_shadow[k];
        commit = 1'b0;
        #1;
        if (n % 16 == 0) check_all();
      end
      if (round % 2 == 0) begin
        @(negedge clk) commit = 1'b1;
        @(negedge clk) commit = 1'b0;
        for (int k = 0; k < P; k++) m_active[k] = m_shadow[k];
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
