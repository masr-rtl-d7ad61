// tb_masr_top_full: end-to-end test of masr_top with every parameter at its default
// (800 hidden units, LANESx32: 2x2 PEs of 8 lanes), two time steps of a
// bidirectional layer followed by a unidirectional two-input layer. The localparams
// below restate the defaults for the testbench's own arrays. The checks are in
// masr_top_body.svh, shared with the reduced-size test.
// The dataflow checked follows the paper; the host load ports, number formats and
// the region layout are this design's own. Runs about 0.9 million cycles, most of
// them loading the four weight matrices one word per cycle.
`timescale 1ns/1ps
module tb_masr_top_full;
  import masr_pkg::*;
  localparam int N = 800, VPE = 2, HPE = 2, LPE = 8, QDEPTH = 1, BANKS = 1, TMAX = 333;
  localparam int WDEPTH = 16384, MDEPTH = 100, RFD = 256, ACT_ROWS = 61440, NREG = 4;
  localparam int T_RUN = 2;
  localparam int WATCHDOG = 3000000;
  localparam int SEED = 7;
  localparam int OUT_SHIFT = 12;    // keeps most hidden values below the 511 clip
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

  masr_top u_dut (.*);

`include "masr_top_body.svh"
endmodule
