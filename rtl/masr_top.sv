// masr_top: the MASR sparse bidirectional-RNN accelerator.
//
// The weight matrix of every matrix-vector product is split over a 2D array of
// lanes: VPE vertical PEs each take N/VPE input rows, and the H = HPE*LPE
// horizontal lanes each take every H-th output column (column c goes to
// horizontal lane c mod H). A PE is a row of LPE lanes sharing one compact
// activation register file. Each lane walks its columns, finds the non-zero
// weight/activation pairs with a mask AND and a leading-non-zero detect, addresses
// the compact weights and activations by popcounts, and issues one MAC per pair.
// Per horizontal position a partial-sum accumulator adds the V lanes' partial sums
// of a column into the N-entry output register file. The VVAdd unit then adds the
// biases, applies ReLU and writes the new hidden state compactly (mask plus packed
// non-zeros) into the activation store, from where the activation loader moves the
// next vector into the PE register files. The layer controller runs all forward
// time steps and then all backward ones.
//
// Defaults are the LANESx32 point, the design the paper places, routes and
// fabricates: 16 horizontal lanes (2 horizontal PEs of 8 lanes) by 2 vertical PEs,
// back end queue depth 1, one activation SRAM bank, 800 hidden units, 10-bit
// weights and activations, 16384 compact weights per lane and direction (the
// paper's 1280 KB weight total over 32 lanes), 2 x 100 weight-mask words of 400
// bits per lane (10 KB), 450 KB of compact activations in 60-bit words, 333 on-chip
// time steps. Weights, masks, biases and activation
// vectors are written through the host ports (the paper loads them from LPDDR4,
// which is outside this design); the idle weight bank may be written while the
// other computes. Lane number for the host is v*H + h.
//
// Not built: dynamic load balancing between lanes, and the DRAM double buffering
// of activations beyond TMAX time steps.
// Lint note: rst_n is reported as both synchronous and asynchronous because the
// handshake assertions in the lane and queue use it in `disable iff`; all flops
// reset asynchronously.
module masr_top
  import masr_pkg::*;
#(
  parameter int unsigned N        = 800,
  parameter int unsigned VPE      = 2,
  parameter int unsigned HPE      = 2,
  parameter int unsigned LPE      = 8,
  parameter int unsigned QDEPTH   = 1,
  parameter int unsigned BANKS    = 1,
  parameter int unsigned TMAX     = 333,
  parameter int unsigned WDEPTH   = 16384,
  parameter int unsigned MDEPTH   = 100,
  parameter int unsigned RFD      = 256,
  parameter int unsigned ACT_ROWS = 61440,
  parameter int unsigned NREG     = 4,
  localparam int unsigned H     = HPE * LPE,
  localparam int unsigned R     = N / VPE,
  localparam int unsigned C     = N / H,
  localparam int unsigned NL    = VPE * H,
  localparam int unsigned G     = VALS_PER_WORD * BANKS,
  localparam int unsigned NVEC  = NREG * TMAX,
  localparam int unsigned NW    = $clog2(N),
  localparam int unsigned XW    = $clog2(N + 1),
  localparam int unsigned GW    = $clog2(G + 1),
  localparam int unsigned LW    = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned WAW   = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned MAW   = (MDEPTH > 1) ? $clog2(MDEPTH) : 1,
  localparam int unsigned RAW   = (ACT_ROWS > 1) ? $clog2(ACT_ROWS) : 1,
  localparam int unsigned VW    = $clog2(NVEC),
  localparam int unsigned TW    = $clog2(TMAX + 1),
  localparam int unsigned RGW   = (NREG > 1) ? $clog2(NREG) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control and configuration
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  input  logic [TW-1:0]         cfg_t,
  input  logic                  cfg_bidir,
  input  logic                  cfg_two_in,
  input  logic [RGW-1:0]        cfg_in_reg0,
  input  logic [RGW-1:0]        cfg_in_reg1,
  input  logic [RGW-1:0]        cfg_out_reg_f,
  input  logic [RGW-1:0]        cfg_out_reg_b,
  input  logic                  cfg_op_en,
  input  logic [NREG-1:0][RAW-1:0] cfg_reg_base,
  input  logic signed [OUTW-1:0] cfg_op_thr,
  input  logic [4:0]            cfg_out_shift,
  input  logic [1:0][SCALEW-1:0] cfg_scale_pos,  // per direction
  input  logic [1:0][SCALEW-1:0] cfg_scale_neg,
  // weight and weight-mask loading
  input  logic                  w_we,
  input  logic [LW-1:0]         w_lane,
  input  logic                  w_bank,
  input  logic [WAW-1:0]        w_addr,
  input  logic [WW-1:0]         w_data,
  input  logic                  m_we,
  input  logic [LW-1:0]         m_lane,
  input  logic                  m_bank,
  input  logic [MAW-1:0]        m_addr,
  input  logic [R-1:0]          m_data,
  // bias loading
  input  logic                  b_we,
  input  logic                  b_dir,
  input  logic [NW-1:0]         b_idx,
  input  logic signed [BIASW-1:0] b_data,
  // activation store host access
  input  logic                  a_rw_en,
  input  logic [RAW-1:0]        a_rw_row,
  input  logic [G-1:0][AW-1:0]  a_rw_data,
  input  logic                  a_rr_en,
  input  logic [RAW-1:0]        a_rr_row,
  output logic [G-1:0][AW-1:0]  a_rr_data,
  input  logic                  a_dw_en,
  input  logic [VW-1:0]         a_dw_vec,
  input  logic [N-1:0]          a_dw_mask,
  input  logic [RAW-1:0]        a_dw_base,
  input  logic                  a_dr_en,
  input  logic [VW-1:0]         a_dr_vec,
  output logic [N-1:0]          a_dr_mask,
  output logic [RAW-1:0]        a_dr_base,
  // status
  output ctrl_state_e           state,
  output logic [NL-1:0]         lane_busy,
  output logic [NL-1:0]         lane_stall,
  output logic [NL-1:0]         lane_mac,
  output logic                  rf_overflow
);
  // ---------------- controller ----------------
  logic            ld_go, ld_clear, ld_busy;
  logic [VW-1:0]   ld_vec;
  logic            pass_start, pass_mat, dir, skip_en, pass_busy, op_capture;
  out_mode_e       acc_mode;
  logic            vv_go, vv_busy;
  logic [RAW-1:0]  vv_row_start, vv_rows;
  logic [VW-1:0]   vv_vec;
  logic [TW-1:0]   step;

  layer_ctrl #(.TMAX(TMAX), .NREG(NREG), .ROWS(ACT_ROWS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .cfg_t, .cfg_bidir, .cfg_two_in, .cfg_in_reg0, .cfg_in_reg1,
    .cfg_out_reg_f, .cfg_out_reg_b, .cfg_op_en, .cfg_reg_base,
    .ld_go, .ld_clear, .ld_vec, .ld_busy,
    .pass_start, .pass_mat, .dir, .skip_en, .acc_mode, .pass_busy, .op_capture,
    .vv_go, .vv_row_start, .vv_vec, .vv_busy, .vv_rows,
    .state, .step);

  // ---------------- activation store and loader ----------------
  logic                 e_rr_en, e_rw_en, e_dr_en, e_dw_en;
  logic [RAW-1:0]       e_rr_row, e_rw_row, e_dw_base;
  logic [G-1:0][AW-1:0] e_rw_data, rr_data;
  logic [VW-1:0]        e_dr_vec;
  logic [N-1:0]         e_dw_mask, dr_mask;
  logic [RAW-1:0]       dr_base;

  act_store #(.N(N), .B(BANKS), .ROWS(ACT_ROWS), .NVEC(NVEC)) u_store (
    .clk,
    .e_rw_en, .e_rw_row, .e_rw_data, .e_rr_en, .e_rr_row,
    .e_dw_en, .e_dw_vec(vv_vec), .e_dw_mask, .e_dw_base, .e_dr_en, .e_dr_vec,
    .h_rw_en(a_rw_en), .h_rw_row(a_rw_row), .h_rw_data(a_rw_data),
    .h_rr_en(a_rr_en), .h_rr_row(a_rr_row),
    .h_dw_en(a_dw_en), .h_dw_vec(a_dw_vec), .h_dw_mask(a_dw_mask), .h_dw_base(a_dw_base),
    .h_dr_en(a_dr_en), .h_dr_vec(a_dr_vec),
    .rr_data, .dr_mask, .dr_base);

  assign a_rr_data = rr_data;
  assign a_dr_mask = dr_mask;
  assign a_dr_base = dr_base;

  logic                    ld_start, ld_valid;
  logic [VPE-1:0][R-1:0]   ld_mask;
  logic [VPE-1:0][XW-1:0]  ld_off;
  logic [XW-1:0]           ld_idx;
  logic [GW-1:0]           ld_cnt;
  logic [G-1:0][AW-1:0]    ld_data;

  act_loader #(.N(N), .V(VPE), .B(BANKS), .ROWS(ACT_ROWS), .NVEC(NVEC)) u_loader (
    .clk, .rst_n, .go(ld_go), .clear(ld_clear), .vec(ld_vec), .busy(ld_busy),
    .dr_en(e_dr_en), .dr_vec(e_dr_vec), .dr_mask, .dr_base,
    .rr_en(e_rr_en), .rr_row(e_rr_row), .rr_data,
    .ld_start, .ld_mask, .ld_off, .ld_valid, .ld_idx, .ld_cnt, .ld_data);

  // ---------------- PE array ----------------
  logic [N-1:0]                below_thr;
  logic [VPE-1:0][HPE-1:0][LPE-1:0] pe_busy, pe_stall, pe_mac, pe_qpop, pe_qempty;
  psum_t [VPE-1:0][HPE-1:0][LPE-1:0] pe_qdout;
  logic [VPE-1:0][HPE-1:0]     pe_ovf;
  logic [HPE-1:0][LPE-1:0][C-1:0] skip;

  for (genvar p = 0; p < HPE; p++) begin : g_skip_p
    for (genvar l = 0; l < LPE; l++) begin : g_skip_l
      for (genvar k = 0; k < C; k++) begin : g_skip_k
        assign skip[p][l][k] = skip_en && below_thr[k * H + p * LPE + l];
      end
    end
  end

  for (genvar v = 0; v < VPE; v++) begin : g_v
    for (genvar p = 0; p < HPE; p++) begin : g_p
      logic [LPE-1:0] w_we_l, m_we_l;
      for (genvar l = 0; l < LPE; l++) begin : g_we
        assign w_we_l[l] = w_we && (w_lane == LW'(v * H + p * LPE + l));
        assign m_we_l[l] = m_we && (m_lane == LW'(v * H + p * LPE + l));
      end
      masr_pe #(.R(R), .C(C), .LPE(LPE), .WDEPTH(WDEPTH), .MDEPTH(MDEPTH), .RFD(RFD),
                .QDEPTH(QDEPTH), .G(G), .XW(XW)) u_pe (
        .clk, .rst_n, .start(pass_start), .mat(pass_mat), .bank(dir), .skip(skip[p]),
        .busy(pe_busy[v][p]),
        .ld_start, .ld_mask(ld_mask[v]), .ld_off(ld_off[v]), .ld_valid, .ld_idx, .ld_cnt,
        .ld_data, .rf_overflow(pe_ovf[v][p]),
        .w_we(w_we_l), .w_bank, .w_addr, .w_data,
        .m_we(m_we_l), .m_bank, .m_addr, .m_data,
        .q_pop(pe_qpop[v][p]), .q_dout(pe_qdout[v][p]), .q_empty(pe_qempty[v][p]),
        .stall(pe_stall[v][p]), .mac_fire(pe_mac[v][p]));
    end
  end

  assign lane_busy   = pe_busy;
  assign lane_stall  = pe_stall;
  assign lane_mac    = pe_mac;
  assign rf_overflow = |pe_ovf;

  // ---------------- partial-sum accumulators and output register file ----------------
  logic [H-1:0]            acc_done, o_we, o_add;
  logic [H-1:0][NW-1:0]    o_idx;
  logic [H-1:0][OUTW-1:0]  o_val;
  logic [NW-1:0]           vv_rd_base;
  logic [G-1:0][OUTW-1:0]  vv_rd_data;

  for (genvar p = 0; p < HPE; p++) begin : g_acc_p
    for (genvar l = 0; l < LPE; l++) begin : g_acc_l
      localparam int unsigned HI = p * LPE + l;
      logic [VPE-1:0] qe, qp;
      psum_t [VPE-1:0] qd;
      for (genvar v = 0; v < VPE; v++) begin : g_q
        assign qe[v] = pe_qempty[v][p][l];
        assign qd[v] = pe_qdout[v][p][l];
        assign pe_qpop[v][p][l] = qp[v];
      end
      psum_accum #(.V(VPE), .C(C), .H(H), .HIDX(HI), .N(N)) u_acc (
        .clk, .rst_n, .start(pass_start), .mode(acc_mode),
        .scale_pos(cfg_scale_pos[dir]), .scale_neg(cfg_scale_neg[dir]),
        .q_empty(qe), .q_dout(qd), .q_pop(qp),
        .wr_en(o_we[HI]), .wr_idx(o_idx[HI]), .wr_val(o_val[HI]), .wr_add(o_add[HI]),
        .done(acc_done[HI]));
    end
  end

  assign pass_busy = (|pe_busy) || !(&acc_done);

  output_rf #(.N(N), .H(H), .G(G)) u_out (
    .clk, .wr_en(o_we), .wr_idx(o_idx), .wr_val(o_val), .wr_add(o_add),
    .rd_base(vv_rd_base), .rd_data(vv_rd_data),
    .op_thr(cfg_op_thr), .op_capture, .below_thr);

  // ---------------- VVAdd ----------------
  vvadd_unit #(.N(N), .B(BANKS), .ROWS(ACT_ROWS)) u_vvadd (
    .clk, .rst_n, .go(vv_go), .dir, .out_shift(cfg_out_shift), .row_start(vv_row_start),
    .busy(vv_busy), .rows_used(vv_rows),
    .b_we, .b_dir, .b_idx, .b_data,
    .rd_base(vv_rd_base), .rd_data(vv_rd_data),
    .rw_en(e_rw_en), .rw_row(e_rw_row), .rw_data(e_rw_data),
    .dw_en(e_dw_en), .dw_mask(e_dw_mask), .dw_base(e_dw_base));

  // The step counter is exported only through the controller's state.
  logic unused_step;
  assign unused_step = ^step;
endmodule
