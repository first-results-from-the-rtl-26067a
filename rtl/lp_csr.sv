// lp_csr -- processor bus slave of the LP FIR filter.
//
// The coefficient calculation runs as software on a processor (a soft core
// in the FPGA or an external ARM). This slave gives it access to every
// filter channel through 32-bit word registers on an Avalon-MM style bus
// with a fixed read latency of one clock (avs_readdatavalid marks the word).
// The word address is {channel, 10-bit register}; register map (lp_pkg):
//   0x000 CTRL   W  bit0: start a covariance run, bit1: commit coefficients
//   0x001 STATUS R  bit0: busy, bit1: done, bit2: clipping seen since the
//                   last STATUS read (cleared by the read)
//   0x002 PARAMS R  [7:0] P, [23:8] D, [31:24] COEF_W
//   0x100+k      RW shadow coefficient k (sign-extended on read)
//   0x200+2j     R  low word of sum j (j < P: R[j], else C[j-P])
//   0x201+2j     R  high word of sum j, sign-extended
// Strobes to the channels (cov_start, coef_wr_en, coef_commit) are
// one-cycle pulses in the cycle of the bus write. coef_idx and sum_idx are
// decoded from the address combinationally and shared by all channels; the
// addressed channel's read data is registered onto avs_readdata.
//
// Taken from the published filter description: the processor reads the
// covariances and writes back the coefficients. Own choices: the bus, the
// register map, the clip flag.
module lp_csr
  import lp_pkg::*;
#(
  parameter int unsigned NUM_CH = 2,
  parameter int unsigned COEF_W = 14,
  parameter int unsigned P      = 32,
  parameter int unsigned D      = 128,
  parameter int unsigned ACC_W  = 38,
  localparam int unsigned CH_W  = (NUM_CH > 1) ? $clog2(NUM_CH) : 1,
  localparam int unsigned AW    = CH_W + REG_AW,
  localparam int unsigned IW    = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned RW    = $clog2(2*P)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // processor bus
  input  logic [AW-1:0]             avs_address,
  input  logic                      avs_write,
  input  logic [31:0]               avs_writedata,
  input  logic                      avs_read,
  output logic [31:0]               avs_readdata,
  output logic                      avs_readdatavalid,
  // towards the channels
  output logic [NUM_CH-1:0]         cov_start,
  output logic [NUM_CH-1:0]         coef_wr_en,
  output logic [NUM_CH-1:0]         coef_commit,
  output logic [IW-1:0]             coef_idx,
  output logic signed [COEF_W-1:0]  coef_wr_data,
  output logic [RW-1:0]             sum_idx,
  input  logic [NUM_CH-1:0]         cov_busy,
  input  logic [NUM_CH-1:0]         cov_done,
  input  logic [NUM_CH-1:0]         clip,
  input  logic signed [COEF_W-1:0]  coef_rd_data [NUM_CH],
  input  logic signed [ACC_W-1:0]   sum_rd_data  [NUM_CH]
);

  logic [CH_W-1:0]   ch;
  logic [REG_AW-1:0] ra;
  logic              ch_ok, is_ctrl, is_status, is_params, is_coef, is_sum;
  logic [REG_AW-1:0] coef_off, sum_off;

  assign ch        = avs_address[REG_AW +: CH_W];
  assign ra        = avs_address[REG_AW-1:0];
  assign ch_ok     = int'(ch) < NUM_CH;
  assign coef_off  = ra - REG_COEF;
  assign sum_off   = ra - REG_SUMS;
  assign is_ctrl   = (ra == REG_CTRL);
  assign is_status = (ra == REG_STATUS);
  assign is_params = (ra == REG_PARAMS);
  assign is_coef   = (ra >= REG_COEF) && (int'(coef_off) < P);
  assign is_sum    = (ra >= REG_SUMS) && (int'(sum_off) < 4*P);

  assign coef_idx     = IW'(coef_off);
  assign sum_idx      = RW'(sum_off >> 1);
  assign coef_wr_data = avs_writedata[COEF_W-1:0];

  always_comb begin
    cov_start   = '0;
    coef_wr_en  = '0;
    coef_commit = '0;
    if (avs_write && ch_ok) begin
      cov_start[ch]   = is_ctrl && avs_writedata[CTRL_START];
      coef_commit[ch] = is_ctrl && avs_writedata[CTRL_COMMIT];
      coef_wr_en[ch]  = is_coef;
    end
  end

  // Clipping seen by each channel, held until its STATUS register is read.
  logic [NUM_CH-1:0] clip_seen;
  logic [NUM_CH-1:0] clip_clr;

  always_comb begin
    clip_clr = '0;
    if (avs_read && ch_ok && is_status) clip_clr[ch] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) clip_seen <= '0;
    else        clip_seen <= (clip_seen & ~clip_clr) | clip;
  end

  logic [CH_W-1:0] chs;      // addressed channel, forced in range
  logic [63:0]     sum_ext;
  logic [31:0]     rdata;

  assign chs = ch_ok ? ch : '0;

  always_comb begin
    sum_ext = 64'(sum_rd_data[chs]);
    rdata   = '0;
    if (ch_ok) begin
      if (is_status)
        rdata = {29'd0, clip_seen[chs], cov_done[chs], cov_busy[chs]};
      else if (is_params)
        rdata = {8'(COEF_W), 16'(D), 8'(P)};
      else if (is_coef)
        rdata = 32'(coef_rd_data[chs]);
      else if (is_sum)
        rdata = sum_off[0] ? sum_ext[63:32] : sum_ext[31:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      avs_readdata      <= '0;
      avs_readdatavalid <= 1'b0;
    end else begin
      avs_readdatavalid <= avs_read;
      if (avs_read) avs_readdata <= rdata;
    end
  end

  // The slave takes one transfer per cycle, either a read or a write.
  a_rw_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(avs_read && avs_write))
    else $error("lp_csr: read and write in the same cycle");

endmodule
