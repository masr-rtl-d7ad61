// tb_masr_top: end-to-end test of masr_top at a reduced size (24 hidden units,
// 2x2 PEs of 2 lanes, 4 time steps), fast enough to run in seconds. The checks
// themselves are in masr_top_body.svh, shared with the full-size test.
// The dataflow checked (forward then backward pass, W_h then W_x per step, VVAdd
// with bias and ReLU, compact storage) follows the paper; the host load ports, the
// number formats and the region layout are this design's own.
`timescale 1ns/1ps
module tb_masr_top;
  import masr_pkg::*;
  localparam int N = 24, VPE = 2, HPE = 2, LPE = 2, QDEPTH = 1, BANKS = 1, TMAX = 4;
  localparam int WDEPTH = 256, MDEPTH = 12, RFD = 12, ACT_ROWS = 256, NREG = 4;
  localparam int T_RUN = 4;
  localparam int WATCHDOG = 200000;
  localparam int SEED = 7;
  localparam int OUT_SHIFT = 9;     // keeps most hidden values below the 511 clip
  localparam int LW_  = $clog2(VPE * HPE * LPE);
  localparam int WAW_ = $clog2(WDEPTH);
  localparam int MAW_ = $clog2(MDEPTH);
  localparam int RAW_ = $clog2(ACT_ROWS);
  localparam int VW_  = $clog2(NREG * TMAX);
  localparam int TW_  = $clog2(TMAX + 1);
  localparam int NW_  = $clog2(N);

  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic start, busy, done, cfg_bidir, cfg_two_in, cfg_op_en;
  logic [TW_-1:0] cfg_t;
  logic [NREG-1:0][RAW_-1:0] cfg_reg_base;
  logic [1:0] cfg_in_reg0, cfg_in_reg1, cfg_out_reg_f, cfg_out_reg_b;
  logic signed [31:0] cfg_op_thr;
  logic [4:0] cfg_out_shift;
  logic [1:0][9:0] cfg_scale_pos, cfg_scale_neg;
  logic w_we, w_bank, m_we, m_bank, b_we, b_dir;
  logic [LW_-1:0] w_lane, m_lane;
  logic [WAW_-1:0] w_addr;
  logic [9:0] w_data;
  logic [MAW_-1:0] m_addr;
  logic [N/VPE-1:0] m_data;
  logic [NW_-1:0] b_idx;
  logic signed [15:0] b_data;
  logic a_rw_en, a_rr_en, a_dw_en, a_dr_en;
  logic [RAW_-1:0] a_rw_row, a_rr_row, a_dw_base, a_dr_base;
  logic [6*BANKS-1:0][9:0] a_rw_data, a_rr_data;
  logic [VW_-1:0] a_dw_vec, a_dr_vec;
  logic [N-1:0] a_dw_mask, a_dr_mask;
  ctrl_state_e state;
  logic [VPE*HPE*LPE-1:0] lane_busy, lane_stall, lane_mac;
  logic rf_overflow;

  masr_top #(.N(N), .VPE(VPE), .HPE(HPE), .LPE(LPE), .QDEPTH(QDEPTH), .BANKS(BANKS),
             .TMAX(TMAX), .WDEPTH(WDEPTH), .MDEPTH(MDEPTH), .RFD(RFD),
             .ACT_ROWS(ACT_ROWS), .NREG(NREG)) u_dut (.*);

`include "masr_top_body.svh"
endmodule
