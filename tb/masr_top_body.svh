// Body shared by the end-to-end testbenches of masr_top (included inside a module
// that first declares the DUT's parameter values as localparams, instantiates the
// DUT as u_dut with the signals below, and sets T_RUN, WATCHDOG and the sparsity).
//
// The test generates random sparse weights for the forward and backward W_h and
// W_x matrices, random biases and random sparse input vectors, loads them through
// the host ports (the last lane's backward weight masks while the forward pass is
// already running, to exercise double buffering), runs two layers and compares every
// stored hidden state with a reference computed here in plain integer arithmetic:
//   layer 1: bidirectional, one input vector per step, no output predication,
//            hidden states to regions 1 (forward) and 2 (backward);
//   layer 2: unidirectional, two input vectors per step (region 1 and region 2,
//            i.e. y = h + g of layer 1), output predication on, result to region 3.
// It also counts how often each mechanism occurred: MACs, back end stalls,
// columns without work, skipped (predicated) columns, weight writes during a run,
// the direction switch, VVAdd row flushes; a mechanism that never happened counts
// as a failure.

  localparam int H_  = HPE * LPE;
  localparam int R_  = N / VPE;
  localparam int C_  = N / H_;
  localparam int NL_ = VPE * H_;
  localparam int G_  = 6 * BANKS;

  int checks = 0, failures = 0;
  longint cycles = 0;

  // model data
  int w   [2][2][N][N];     // [dir][mat][row][col]
  int bia [2][N];
  int xin [TMAX][N];
  int href[4][TMAX][N];     // reference vectors per region

  // mechanism counters
  longint n_mac = 0, n_stall = 0, n_empty_cols = 0, n_skip_cols = 0, n_wr_during = 0;
  longint n_dir_switch = 0, n_flush = 0, n_two_in = 0;

  longint n_ovf = 0;
  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (rf_overflow) n_ovf <= n_ovf + 1;
    n_mac   <= n_mac + $countones(lane_mac);
    n_stall <= n_stall + $countones(lane_stall);
  end

  initial begin
    #(WATCHDOG * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int relu_q(longint s, int sh);
    longint q;
    if (s <= 0) return 0;
    q = s >>> sh;
    if (q > 511) q = 511;
    return int'(q);
  endfunction

  function automatic longint scale(longint pos, longint neg, int sp, int sn);
    return (pos * sp + neg * sn) >>> 8;
  endfunction

  function automatic int rnd(int n); return int'($urandom_range(n - 1, 0)); endfunction
  task automatic tick(); @(posedge clk); #1; endtask

  // host loads -----------------------------------------------------------
  int nz_pos = 33, nz_act = 40;
  int sp [2] = '{224, 192};
  int sn [2] = '{256, 256};
  int sh = OUT_SHIFT;

  task automatic load_lane(int d, int lane, bit do_w, bit do_m);
    int v, h, addr;
    logic [R_-1:0] m;
    v = lane / H_;
    h = lane % H_;
    addr = 0;
    for (int mat = 0; mat < 2; mat++) begin
      for (int k = 0; k < C_; k++) begin
        int c;
        c = k * H_ + h;
        m = '0;
        for (int i = 0; i < R_; i++) begin
          if (w[d][mat][v*R_ + i][c] != 0) begin
            m[i] = 1'b1;
            w_we = do_w; w_lane = LW_'(lane); w_bank = 1'(d); w_addr = WAW_'(addr);
            w_data = 10'(w[d][mat][v*R_ + i][c]);
            if (do_w) tick();
            w_we = 0;
            addr++;
          end
        end
        m_we = do_m; m_lane = LW_'(lane); m_bank = 1'(d); m_addr = MAW_'(mat * C_ + k); m_data = m;
        if (do_m) tick();
        m_we = 0;
      end
    end
  endtask

  int wrow;  // next free row of region 0
  task automatic store_vec(int reg_, int t, int vals[N], inout int row);
    logic [N-1:0] m;
    int fill;
    logic [G_-1:0][9:0] buffer;
    m = '0; fill = 0; buffer = '0;
    a_dw_en = 1; a_dw_vec = VW_'(reg_ * TMAX + t); a_dw_base = RAW_'(row);
    for (int i = 0; i < N; i++) begin
      if (vals[i] != 0) begin
        m[i] = 1'b1;
        buffer[fill] = 10'(vals[i]);
        fill++;
        if (fill == G_) begin
          a_rw_en = 1; a_rw_row = RAW_'(row); a_rw_data = buffer;
          tick(); a_rw_en = 0; row++; fill = 0; buffer = '0;
        end
      end
    end
    if (fill != 0) begin
      a_rw_en = 1; a_rw_row = RAW_'(row); a_rw_data = buffer;
      tick(); a_rw_en = 0; row++;
    end
    a_dw_en = 1; a_dw_vec = VW_'(reg_ * TMAX + t); a_dw_mask = m; a_dw_base = RAW_'(row);
    // descriptor base is the first row of the vector
    a_dw_base = RAW_'(row - (($countones(m) + G_ - 1) / G_));
    tick(); a_dw_en = 0;
  endtask

  task automatic check_vec(int reg_, int t, string tag);
    logic [N-1:0] m;
    int base, idx, errs;
    logic [G_-1:0][9:0] rowd;
    a_dr_en = 1; a_dr_vec = VW_'(reg_ * TMAX + t);
    tick(); a_dr_en = 0;
    m = a_dr_mask; base = int'(a_dr_base);
    idx = 0; errs = 0;
    for (int i = 0; i < N; i++) begin
      int got;
      got = 0;
      if (m[i]) begin
        if (idx % G_ == 0) begin
          a_rr_en = 1; a_rr_row = RAW_'(base + idx / G_);
          tick(); a_rr_en = 0;
          rowd = a_rr_data;
        end
        got = int'($signed(rowd[idx % G_]));
        idx++;
      end
      if (got != href[reg_][t][i]) begin
        if (errs < 5) $display("MISMATCH %s reg %0d t %0d neuron %0d: got %0d expected %0d",
                               tag, reg_, t, i, got, href[reg_][t][i]);
        errs++;
      end
    end
    checks++;
    if (errs != 0) failures++;
  endtask

  // reference layer -------------------------------------------------------
  task automatic ref_layer(int nt, bit bidir, bit two, int ir0, int ir1, int orf, int orb,
                           bit op, int thr, int src [2][TMAX][N]);
    for (int d = 0; d < (bidir ? 2 : 1); d++) begin
      int orr;
      orr = d ? orb : orf;
      for (int s = 0; s < nt; s++) begin
        int t, tp;
        longint o [N];
        bit pred [N];
        t = d ? nt - 1 - s : s;
        tp = d ? t + 1 : t - 1;
        for (int c = 0; c < N; c++) begin
          longint pos, neg;
          pos = 0; neg = 0;
          if (s > 0)
            for (int r = 0; r < N; r++) begin
              longint p;
              p = longint'(w[d][0][r][c]) * href[orr][tp][r];
              if (w[d][0][r][c] >= 0) pos += p; else neg += p;
            end
          o[c] = scale(pos, neg, sp[d], sn[d]);
          pred[c] = op && (s > 0) && (o[c] < thr);
          if (pred[c]) n_skip_cols++;
        end
        for (int part = 0; part < (two ? 2 : 1); part++) begin
          for (int c = 0; c < N; c++) begin
            longint pos, neg;
            pos = 0; neg = 0;
            if (!pred[c])
              for (int r = 0; r < N; r++) begin
                longint p;
                p = longint'(w[d][1][r][c]) * src[part][t][r];
                if (w[d][1][r][c] >= 0) pos += p; else neg += p;
              end
            o[c] += scale(pos, neg, sp[d], sn[d]);
          end
        end
        for (int c = 0; c < N; c++) href[orr][t][c] = relu_q(o[c] + bia[d][c], sh);
      end
    end
  endtask

  int src1 [2][TMAX][N];
  int src2 [2][TMAX][N];

  initial begin
    int row;
    {start, cfg_bidir, cfg_two_in, cfg_op_en, w_we, m_we, b_we, a_rw_en, a_rr_en, a_dw_en, a_dr_en} = '0;
    cfg_t = '0; cfg_in_reg0 = '0; cfg_in_reg1 = '0; cfg_out_reg_f = '0; cfg_out_reg_b = '0;
    for (int r = 0; r < NREG; r++) cfg_reg_base[r] = RAW_'(r * (ACT_ROWS / NREG));
    cfg_op_thr = '0; cfg_out_shift = 5'(sh);
    cfg_scale_pos[0] = 10'(sp[0]); cfg_scale_pos[1] = 10'(sp[1]);
    cfg_scale_neg[0] = 10'(sn[0]); cfg_scale_neg[1] = 10'(sn[1]);
    w_lane = '0; w_bank = 0; w_addr = '0; w_data = '0; m_lane = '0; m_bank = 0; m_addr = '0; m_data = '0;
    b_dir = 0; b_idx = '0; b_data = '0; a_rw_row = '0; a_rw_data = '0; a_rr_row = '0;
    a_dw_vec = '0; a_dw_mask = '0; a_dw_base = '0; a_dr_vec = '0;
    rst_n = 0;
    void'($urandom(SEED));
    // random model
    for (int d = 0; d < 2; d++)
      for (int m = 0; m < 2; m++)
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++)
            w[d][m][r][c] = (rnd(100) < nz_pos) ? (rnd(1023) - 511) : 0;
    for (int d = 0; d < 2; d++)
      for (int c = 0; c < N; c++) bia[d][c] = rnd(4096) - 2048;
    for (int t = 0; t < TMAX; t++)
      for (int i = 0; i < N; i++)
        xin[t][i] = (rnd(100) < nz_act) ? rnd(200) + 1 : 0;
    // keep every register file slice within its depth
    for (int t = 0; t < TMAX; t++)
      for (int v = 0; v < VPE; v++) begin
        int cnt;
        cnt = 0;
        for (int i = 0; i < R_; i++) if (xin[t][v*R_ + i] != 0) begin
          cnt++;
          if (cnt > RFD) xin[t][v*R_ + i] = 0;
        end
      end
    begin
      int np, nn;
      np = 0; nn = 0;
      foreach (w[d, m, r, c]) if (w[d][m][r][c] > 0) np++; else if (w[d][m][r][c] < 0) nn++;
      $display("weights: %0d positive, %0d negative", np, nn);
    end
    repeat (3) tick();
    rst_n = 1;
    tick();
    // load forward banks of all lanes and backward banks of all lanes but the last
    for (int l = 0; l < NL_; l++) load_lane(0, l, 1, 1);
    for (int l = 0; l < NL_ - 1; l++) load_lane(1, l, 1, 1);
    load_lane(1, NL_ - 1, 1, 0);
    for (int d = 0; d < 2; d++)
      for (int c = 0; c < N; c++) begin
        b_we = 1; b_dir = 1'(d); b_idx = NW_'(c); b_data = 16'(bia[d][c]);
        tick(); b_we = 0;
      end
    row = 0;
    for (int t = 0; t < T_RUN; t++) store_vec(0, t, xin[t], row);

    // ---------------- layer 1 ----------------
    for (int t = 0; t < TMAX; t++) src1[0][t] = xin[t];
    ref_layer(T_RUN, 1, 0, 0, 0, 1, 2, 0, 0, src1);
    cfg_t = TW_'(T_RUN); cfg_bidir = 1; cfg_two_in = 0; cfg_in_reg0 = 0;
    cfg_out_reg_f = 1; cfg_out_reg_b = 2; cfg_op_en = 0;
    start = 1; tick(); start = 0;
    // the last lane's backward weight masks arrive while the forward pass runs
    load_lane(1, NL_ - 1, 0, 1);
    if (u_dut.u_ctrl.dir == 1'b0 && busy) n_wr_during++;
    else begin
      $display("backward weights were not loaded during the forward pass");
      failures++;
    end
    checks++;
    begin
      bit seen_dir0;
      seen_dir0 = 0;
      while (!done) begin
        if (u_dut.u_ctrl.dir == 1'b0) seen_dir0 = 1;
        else if (seen_dir0) begin n_dir_switch++; seen_dir0 = 0; end
        tick();
      end
    end
    $display("layer 1 done at cycle %0d", cycles);
    for (int t = 0; t < T_RUN; t++) begin
      check_vec(1, t, "L1 fwd");
      check_vec(2, t, "L1 bck");
    end

    // ---------------- layer 2: y = h + g input, output predication ----------------
    for (int t = 0; t < TMAX; t++) begin
      src2[0][t] = href[1][t];
      src2[1][t] = href[2][t];
    end
    ref_layer(T_RUN, 0, 1, 1, 2, 3, 0, 1, -2000, src2);
    n_two_in++;
    cfg_bidir = 0; cfg_two_in = 1; cfg_in_reg0 = 1; cfg_in_reg1 = 2;
    cfg_out_reg_f = 3; cfg_op_en = 1; cfg_op_thr = -2000;
    start = 1; tick(); start = 0;
    while (!done) tick();
    $display("layer 2 done at cycle %0d", cycles);
    for (int t = 0; t < T_RUN; t++) check_vec(3, t, "L2");

    // the reference must be neither all zero nor all non-zero, and mostly unclipped
    begin
      int nzr, tot, sat;
      nzr = 0; tot = 0; sat = 0;
      for (int r = 1; r < 4; r++)
        for (int t = 0; t < T_RUN; t++)
          for (int i = 0; i < N; i++) begin
            tot++;
            if (href[r][t][i] != 0) nzr++;
            if (href[r][t][i] == 511) sat++;
          end
      $display("reference hidden states: %0d of %0d non-zero, %0d clipped at 511", nzr, tot, sat);
      checks++;
      if (nzr == 0 || nzr == tot) failures++;
      checks++;
      if (2 * sat > nzr) begin failures++; $display("FAIL most hidden values are clipped"); end
    end
    // ---------------- mechanism coverage ----------------
    foreach (empty_cnt[v, p, l]) n_empty_cols += empty_cnt[v][p][l];
    $display("mechanisms: mac=%0d stall=%0d empty_cols=%0d skipped_cols=%0d weight_writes_during_run=%0d dir_switch=%0d vvadd_flush=%0d two_input_layers=%0d",
             n_mac, n_stall, n_empty_cols, n_skip_cols, n_wr_during, n_dir_switch, n_flush, n_two_in);
    checks++; if (n_ovf != 0) begin failures++; $display("register file overflow in %0d cycles", n_ovf); end
    checks++; if (n_mac == 0) begin failures++; $display("no MAC issued"); end
    checks++; if (n_stall == 0) begin failures++; $display("no back end stall"); end
    checks++; if (n_empty_cols == 0) begin failures++; $display("no column without work"); end
    checks++; if (n_skip_cols == 0) begin failures++; $display("no predicated column"); end
    checks++; if (n_dir_switch == 0) begin failures++; $display("no direction switch"); end
    checks++; if (n_flush == 0) begin failures++; $display("no VVAdd flush of a partial row"); end
    checks++; if (n_wr_during == 0) begin failures++; $display("no double-buffered load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // columns without work: an end-of-column token without a MAC leaving S4 of a lane
  longint empty_cnt [VPE][HPE][LPE];
  for (genvar v = 0; v < VPE; v++) begin : g_cv
    for (genvar p = 0; p < HPE; p++) begin : g_cp
      for (genvar l = 0; l < LPE; l++) begin : g_cl
        initial empty_cnt[v][p][l] = 0;
        always @(posedge clk)
          if (u_dut.g_v[v].g_p[p].u_pe.g_lane[l].u_lane.s4.valid &&
              u_dut.g_v[v].g_p[p].u_pe.g_lane[l].u_lane.s4.last &&
              !u_dut.g_v[v].g_p[p].u_pe.g_lane[l].u_lane.s4.mac &&
              !u_dut.g_v[v].g_p[p].u_pe.g_lane[l].u_lane.stall)
            empty_cnt[v][p][l] <= empty_cnt[v][p][l] + 1;
      end
    end
  end

  always @(posedge clk) begin
    if (int'(u_dut.u_vvadd.st) == 2 && u_dut.u_vvadd.fill != 0) n_flush <= n_flush + 1;
  end
