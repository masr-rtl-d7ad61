// masr_lane: one decoupled, pipelined sparse matrix-vector lane.
//
// A lane owns a block of the weight matrix: R input rows (its vertical slice) times
// C output columns. For every column it reads the column's R-bit weight mask, ANDs
// it with the slice's activation mask (front end) and then, in a four-stage back
// end, issues exactly one multiply-accumulate per set bit of the resulting work
// mask:
//   S1  leading non-zero detect picks the next work bit and clears it
//   S2  compact addresses: weight = column base + ones of the weight mask below the
//       bit; activation = ones of the activation mask below the bit
//   S3  read the compact weight SRAM and the PE's compact activation register file
//   S4  multiply-accumulate into the positive-weight or negative-weight accumulator
// When a column's last work bit reaches S4 the two accumulators are pushed to the
// back end queue as one partial sum; a column without work sends a single empty
// token so that the accumulator still receives its (zero) partial sum. If the queue
// is full the whole back end stalls. As long as work remains, one MAC issues per
// cycle, with no bubbles between columns (the front end keeps two decoded columns
// ready).
//
// The column base is not stored: the lane walks its columns in order and adds the
// popcount of each weight mask to a running base, so the compact weights of the
// lane are simply the non-zeros of its columns in column order, W_h block first,
// W_x block second (mask words 0..C-1 are W_h, C..2C-1 are W_x). The W_x block
// starts where the last W_h pass of the same bank ended (remembered per bank); the
// controller always runs W_h before W_x.
// Weights and masks are double buffered: bank 0 forward, bank 1 backward; the idle
// bank can be written while the other computes.
//
// Taken from the paper: AND of masks, single-cycle LNZD, popcount addressing, the
// four back-end stages, separate positive and negative accumulators, push to a
// queue per lane, separate forward/backward weight and mask SRAMs. This design's
// choices: the column order within a lane, the running base, the two-entry front
// end buffer, the empty token, the skip input used for output predication (a
// skipped column reads its mask only to advance the base).
//
// Interface: `start` (one cycle, with `mat` and `bank`) begins a pass over the C
// columns; `busy` stays high until the last partial sum has been pushed. `amask`
// and the register file must stay constant during a pass.
// Lint note: the top bits of the activation popcount are unused when RFD < R (the
// register file holds fewer entries than the slice has rows); this is intended.
module masr_lane
  import masr_pkg::*;
#(
  parameter int unsigned R      = 400,    // input rows per lane (N / vertical PEs)
  parameter int unsigned C      = 50,     // output columns per lane (N / horizontal lanes)
  parameter int unsigned WDEPTH = 16384,  // compact weights per bank (20 KB of 10-bit words)
  parameter int unsigned MDEPTH = 100,    // weight-mask words per bank (2C words of R bits)
  parameter int unsigned RFD    = 256,    // activation register file depth
  parameter int unsigned QDEPTH = 1,      // back end queue depth
  localparam int unsigned IW    = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned WAW   = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned MAW   = (MDEPTH > 1) ? $clog2(MDEPTH) : 1,
  localparam int unsigned RFAW  = (RFD > 1) ? $clog2(RFD) : 1,
  localparam int unsigned CW    = $clog2(R + 1),
  localparam int unsigned KW    = $clog2(C + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // pass control
  input  logic                start,
  input  logic                mat,      // 0: W_h block, 1: W_x block
  input  logic                bank,     // 0: forward weights, 1: backward weights
  input  logic [C-1:0]        skip,     // columns whose work is skipped (output predication)
  output logic                busy,
  // activations of the slice (from the PE register file)
  input  logic [R-1:0]        amask,
  output logic [RFAW-1:0]     rf_addr,
  input  logic signed [AW-1:0] rf_data,
  // weight and mask loading
  input  logic                w_we,
  input  logic                w_bank,
  input  logic [WAW-1:0]      w_addr,
  input  logic [WW-1:0]       w_data,
  input  logic                m_we,
  input  logic                m_bank,
  input  logic [MAW-1:0]      m_addr,
  input  logic [R-1:0]        m_data,
  // back end queue
  input  logic                q_pop,
  output psum_t               q_dout,
  output logic                q_empty,
  // activity
  output logic                stall,
  output logic                mac_fire
);

  // ---------------- memories (forward and backward banks) ----------------
  logic [R-1:0]  mrd [2];
  logic [WW-1:0] wrd [2];
  logic          m_re, w_re;
  logic [MAW-1:0] m_raddr;
  logic [WAW-1:0] w_raddr;
  logic          bank_q;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sram_1r1w #(.WIDTH(R), .DEPTH(MDEPTH)) u_mask (
      .clk, .we(m_we && (m_bank == 1'(b))), .waddr(m_addr), .wdata(m_data),
      .re(m_re && (bank_q == 1'(b))), .raddr(m_raddr), .rdata(mrd[b]));
    sram_1r1w #(.WIDTH(WW), .DEPTH(WDEPTH)) u_wgt (
      .clk, .we(w_we && (w_bank == 1'(b))), .waddr(w_addr), .wdata(w_data),
      .re(w_re && (bank_q == 1'(b))), .raddr(w_raddr), .rdata(wrd[b]));
  end

  // ---------------- front end ----------------
  typedef struct packed {
    logic [R-1:0]   work;
    logic [R-1:0]   wmask;
    logic [WAW-1:0] wbase;
  } fe_t;

  logic           mat_q;
  logic [C-1:0]   skip_q;
  logic [KW-1:0]  k_issue;      // next column whose mask is read
  logic [KW-1:0]  k_arrive;     // column whose mask arrives
  logic           rd_pend;
  logic [WAW-1:0] base_run;
  logic [WAW-1:0] wx_base [2];   // start of the W_x block, per bank
  fe_t            fifo [2];
  logic [1:0]     fifo_cnt;
  logic           fifo_pop, fifo_push;
  fe_t            fe_new;
  logic [CW-1:0]  mask_ones;
  logic [KW-1:0]  cols_done;

  assign m_re    = busy && (k_issue < KW'(C)) && (2'(fifo_cnt) + 2'(rd_pend) < 2'd2);
  assign m_raddr = mat_q ? MAW'(KW'(C) + k_issue) : MAW'(k_issue);

  always_comb begin
    mask_ones = '0;
    for (int i = 0; i < R; i++) mask_ones = mask_ones + CW'(mrd[bank_q][i]);
  end

  assign fifo_push   = rd_pend;
  assign fe_new.wmask = mrd[bank_q];
  assign fe_new.work  = skip_q[k_arrive] ? '0 : (mrd[bank_q] & amask);
  assign fe_new.wbase = base_run;

  // ---------------- back end stage registers ----------------
  typedef struct packed {
    logic           valid;
    logic           mac;
    logic           last;
    logic [IW-1:0]  idx;
    logic [R-1:0]   wmask;
    logic [WAW-1:0] wbase;
  } s2_t;
  typedef struct packed {
    logic            valid;
    logic            mac;
    logic            last;
    logic [WAW-1:0]  waddr;
    logic [RFAW-1:0] aaddr;
  } s3_t;
  typedef struct packed {
    logic                valid;
    logic                mac;
    logic                last;
    logic signed [AW-1:0] act;
  } s4_t;

  s2_t s2;
  s3_t s3;
  s4_t s4;

  // S1: select the current column or the next decoded one, find its next work bit
  logic          cur_valid;
  logic [R-1:0]  cur_work, cur_wmask;
  logic [WAW-1:0] cur_wbase;
  logic          sel_valid, sel_from_fifo;
  logic [R-1:0]  sel_work, sel_wmask, sel_rem;
  logic [WAW-1:0] sel_wbase;
  logic [IW-1:0] sel_idx;
  logic          sel_found;

  assign sel_from_fifo = !cur_valid && (fifo_cnt != 0);
  assign sel_valid     = cur_valid || (fifo_cnt != 0);
  assign sel_work      = cur_valid ? cur_work  : fifo[0].work;
  assign sel_wmask     = cur_valid ? cur_wmask : fifo[0].wmask;
  assign sel_wbase     = cur_valid ? cur_wbase : fifo[0].wbase;
  assign sel_rem       = sel_work & (sel_work - R'(1));

  lnzd #(.W(R)) u_lnzd (.mask(sel_work), .idx(sel_idx), .found(sel_found));

  assign fifo_pop = sel_from_fifo && !stall;

  // S2: compact addresses
  logic [CW-1:0] w_off, a_off;
  prefix_popcount #(.W(R)) u_pc_w (.mask(s2.wmask), .idx(s2.idx), .count(w_off));
  prefix_popcount #(.W(R)) u_pc_a (.mask(amask),    .idx(s2.idx), .count(a_off));

  // S3: memory reads
  assign w_re    = s3.valid && s3.mac && !stall;
  assign w_raddr = s3.waddr;
  assign rf_addr = s3.aaddr;

  // S4: MAC
  logic signed [WW-1:0]      wgt;
  logic signed [WW+AW-1:0]   prod;
  logic signed [ACCW-1:0]    acc_pos, acc_neg, acc_pos_n, acc_neg_n;
  logic                      q_full, q_push;

  assign wgt  = $signed(wrd[bank_q]);
  assign prod = wgt * s4.act;
  always_comb begin
    acc_pos_n = acc_pos;
    acc_neg_n = acc_neg;
    if (s4.mac) begin
      if (wgt >= 0) acc_pos_n = acc_pos + ACCW'(prod);
      else          acc_neg_n = acc_neg + ACCW'(prod);
    end
  end

  assign q_push   = s4.valid && s4.last;
  assign stall    = q_push && q_full;
  assign mac_fire = s4.valid && s4.mac && !stall;

  psum_fifo #(.WIDTH($bits(psum_t)), .DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n,
    .push(q_push), .din({acc_pos_n, acc_neg_n}), .full(q_full),
    .pop(q_pop), .dout(q_dout), .empty(q_empty));

  // ---------------- sequential logic ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      mat_q     <= 1'b0;
      bank_q    <= 1'b0;
      skip_q    <= '0;
      k_issue   <= '0;
      k_arrive  <= '0;
      rd_pend   <= 1'b0;
      base_run  <= '0;
      wx_base[0] <= '0;
      wx_base[1] <= '0;
      fifo_cnt  <= '0;
      cur_valid <= 1'b0;
      cur_work  <= '0;
      cur_wmask <= '0;
      cur_wbase <= '0;
      s2        <= '0;
      s3        <= '0;
      s4        <= '0;
      acc_pos   <= '0;
      acc_neg   <= '0;
      cols_done <= '0;
    end else if (start) begin
      busy      <= 1'b1;
      mat_q     <= mat;
      bank_q    <= bank;
      skip_q    <= skip;
      k_issue   <= '0;
      k_arrive  <= '0;
      rd_pend   <= 1'b0;
      base_run  <= mat ? wx_base[bank] : '0;
      fifo_cnt  <= '0;
      cur_valid <= 1'b0;
      s2        <= '0;
      s3        <= '0;
      s4        <= '0;
      acc_pos   <= '0;
      acc_neg   <= '0;
      cols_done <= '0;
    end else begin
      // front end: mask read issue and decode
      rd_pend <= m_re;
      if (m_re) k_issue <= k_issue + KW'(1);
      if (fifo_push) begin
        k_arrive <= k_arrive + KW'(1);
        base_run <= base_run + WAW'(mask_ones);
        if (!mat_q && k_arrive == KW'(C - 1)) wx_base[bank_q] <= base_run + WAW'(mask_ones);
      end
      // two-entry decoded-column buffer
      if (fifo_pop) fifo[0] <= fifo[1];
      if (fifo_push) begin
        if (fifo_pop) begin
          if (fifo_cnt == 2'd1) fifo[0] <= fe_new;
          else                  fifo[1] <= fe_new;
        end else begin
          if (fifo_cnt == 2'd0) fifo[0] <= fe_new;
          else                  fifo[1] <= fe_new;
        end
      end
      fifo_cnt <= fifo_cnt + 2'(fifo_push) - 2'(fifo_pop);

      if (!stall) begin
        // S1
        if (sel_valid) begin
          s2.valid <= 1'b1;
          s2.mac   <= sel_found;
          s2.last  <= (sel_rem == '0);
          s2.idx   <= sel_idx;
          s2.wmask <= sel_wmask;
          s2.wbase <= sel_wbase;
          if (sel_rem == '0) begin
            cur_valid <= 1'b0;
          end else begin
            cur_valid <= 1'b1;
            cur_work  <= sel_rem;
            cur_wmask <= sel_wmask;
            cur_wbase <= sel_wbase;
          end
        end else begin
          s2.valid <= 1'b0;
        end
        // S2
        s3.valid <= s2.valid;
        s3.mac   <= s2.mac;
        s3.last  <= s2.last;
        s3.waddr <= s2.wbase + WAW'(w_off);
        s3.aaddr <= RFAW'(a_off);
        // S3
        s4.valid <= s3.valid;
        s4.mac   <= s3.mac;
        s4.last  <= s3.last;
        s4.act   <= rf_data;
        // S4
        if (s4.valid) begin
          if (s4.last) begin
            acc_pos   <= '0;
            acc_neg   <= '0;
            cols_done <= cols_done + KW'(1);
            if (cols_done == KW'(C - 1)) busy <= 1'b0;
          end else begin
            acc_pos <= acc_pos_n;
            acc_neg <= acc_neg_n;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));
endmodule
