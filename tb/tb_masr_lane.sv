// tb_masr_lane: one lane (16 rows x 4 columns) with random sparse weights in both
// banks and a random sparse activation slice. Checks every partial sum (positive
// and negative accumulators) against a reference, the number of MACs (exactly one
// per set bit of the work mask), the pass length with an always-ready queue (one
// cycle per work item, one per column without work, plus the pipeline fill),
// back-pressure stalls with a randomly popped queue, skipped columns, and the W_x
// block starting after the W_h block of the same bank.
// The four-stage back end and separate positive/negative accumulators follow the
// paper; the column order, the zero partial sum of an empty column and the two-bank
// layout are this design's choices and are checked as such. A watchdog ends the run.
`timescale 1ns/1ps
module tb_masr_lane;
  import masr_pkg::*;
  localparam int R = 16, C = 4, WDEPTH = 128, MDEPTH = 8, RFD = 16;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic start, mat, bank, busy, w_we, w_bank, m_we, m_bank, q_pop, q_empty, stall, mac_fire;
  logic [C-1:0] skip;
  logic [R-1:0] amask, m_data;
  logic [3:0] rf_addr;
  logic signed [AW-1:0] rf_data;
  logic [6:0] w_addr;
  logic [WW-1:0] w_data;
  logic [2:0] m_addr;
  psum_t q_dout;

  masr_lane #(.R(R), .C(C), .WDEPTH(WDEPTH), .MDEPTH(MDEPTH), .RFD(RFD), .QDEPTH(1)) u_dut (.*);

  int checks = 0, failures = 0;
  int w [2][2][R][C];       // [bank][mat][row][col]
  int act [R];
  int rf [RFD];
  longint n_mac = 0, n_stall = 0;

  assign rf_data = AW'(rf[rf_addr]);
  always @(posedge clk) begin
    if (mac_fire) n_mac++;
    if (stall) n_stall++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int n); return int'($urandom_range(n - 1, 0)); endfunction

  task automatic tick(); @(posedge clk); #1; endtask

  // run one pass; pop_pct: chance the queue is popped in a cycle
  task automatic run_pass(bit m, bit b, logic [C-1:0] sk, int pop_pct, output int cyc, output int work);
    int col;
    longint mac0;
    col = 0; cyc = 0; work = 0;
    mac0 = n_mac;
    for (int c = 0; c < C; c++)
      if (!sk[c]) for (int r = 0; r < R; r++) if (w[b][m][r][c] != 0 && act[r] != 0) work++;
    mat = m; bank = b; skip = sk; start = 1; tick(); start = 0;
    while (busy || !q_empty) begin
      q_pop = (rnd(100) < pop_pct);
      #0;
      if (q_pop && !q_empty) begin
        longint ep, en;
        ep = 0; en = 0;
        if (!sk[col])
          for (int r = 0; r < R; r++)
            if (w[b][m][r][col] != 0 && act[r] != 0) begin
              if (w[b][m][r][col] >= 0) ep += w[b][m][r][col] * act[r];
              else en += w[b][m][r][col] * act[r];
            end
        checks++;
        if (q_dout.pos != ACCW'(ep) || q_dout.neg != ACCW'(en)) begin
          failures++;
          $display("FAIL bank %0d mat %0d col %0d: got %0d/%0d expected %0d/%0d",
                   b, m, col, q_dout.pos, q_dout.neg, ep, en);
        end
        col++;
      end
      tick();
      q_pop = 0;
      if (busy) cyc++;
    end
    checks++;
    if (col != C) begin failures++; $display("FAIL %0d partial sums instead of %0d", col, C); end
    checks++;
    if (n_mac - mac0 != work) begin failures++; $display("FAIL %0d MACs, expected %0d", n_mac - mac0, work); end
  endtask

  initial begin
    int cyc, work, empties, base;
    {start, mat, bank, w_we, w_bank, m_we, m_bank, q_pop} = '0;
    skip = '0; m_data = '0; w_addr = '0; w_data = '0; m_addr = '0; amask = '0;
    rst_n = 0;
    for (int b = 0; b < 2; b++) for (int m = 0; m < 2; m++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      w[b][m][r][c] = (rnd(100) < 40) ? rnd(1023) - 511 : 0;
    w[0][0][0][2] = 0;
    for (int r = 0; r < R; r++) w[0][0][r][1] = 0;   // a column without work
    for (int r = 0; r < R; r++) act[r] = (rnd(100) < 50) ? rnd(1023) - 511 : 0;
    act[3] = 0; act[4] = 7;
    begin int nzw, nza; nzw = 0; nza = 0; foreach (w[b,m,r,c]) if (w[b][m][r][c] != 0) nzw++; foreach (act[r]) if (act[r] != 0) nza++; $display("non-zero weights %0d, non-zero activations %0d", nzw, nza); end
    begin
      int n;
      n = 0;
      for (int r = 0; r < R; r++) if (act[r] != 0) begin amask[r] = 1; rf[n] = act[r]; n++; end
      for (int i = n; i < RFD; i++) rf[i] = 0;
    end
    repeat (2) tick();
    rst_n = 1;
    // load both banks: W_h columns then W_x columns, non-zeros in row order
    for (int b = 0; b < 2; b++) begin
      base = 0;
      for (int m = 0; m < 2; m++)
        for (int c = 0; c < C; c++) begin
          logic [R-1:0] mk;
          mk = '0;
          for (int r = 0; r < R; r++) if (w[b][m][r][c] != 0) begin
            mk[r] = 1;
            w_we = 1; w_bank = 1'(b); w_addr = 7'(base); w_data = WW'(w[b][m][r][c]);
            tick(); w_we = 0; base++;
          end
          m_we = 1; m_bank = 1'(b); m_addr = 3'(m * C + c); m_data = mk;
          tick(); m_we = 0;
        end
    end
    // pass 1: bank 0 W_h, queue always ready: timing check
    run_pass(0, 0, '0, 100, cyc, work);
    empties = 0;
    for (int c = 0; c < C; c++) begin
      bit any;
      any = 0;
      for (int r = 0; r < R; r++) if (w[0][0][r][c] != 0 && act[r] != 0) any = 1;
      if (!any) empties++;
    end
    $display("pass 1: %0d work items, %0d empty columns, %0d busy cycles", work, empties, cyc);
    checks++;
    if (cyc < work + empties || cyc > work + empties + 7) begin
      failures++; $display("FAIL pass length %0d not within [%0d, %0d]", cyc, work + empties, work + empties + 7);
    end
    checks++;
    if (empties == 0) begin failures++; $display("FAIL no empty column exercised"); end
    // pass 2: bank 0 W_x with back pressure and a skipped column
    run_pass(1, 0, 4'b0100, 20, cyc, work);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no stall under back pressure"); end
    // bank 1: W_h then W_x
    run_pass(0, 1, '0, 60, cyc, work);
    run_pass(1, 1, '0, 60, cyc, work);
    // bank 0 W_x again: base remembered per bank
    run_pass(1, 0, '0, 100, cyc, work);
    $display("MACs %0d, stall cycles %0d", n_mac, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
