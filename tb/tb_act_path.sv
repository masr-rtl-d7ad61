// tb_act_path: the hidden-state path of one time step, at reduced size (N=24, two
// vertical slices of 12 rows, one bank of six values per row). The VVAdd unit reads
// a modelled output register file, adds the bias of the chosen direction, applies
// ReLU and the output shift, and writes the compact vector (packed non-zeros plus
// mask and start row) into the activation store; the loader then reads it back
// into two activation register files. Checks every register file mask and entry
// against a reference, the number of rows used, the all-zero "clear" load, a vector
// written through the host ports of the store, and that no register file overflows.
// Serves as the testbench of vvadd_unit, act_store, act_loader and act_regfile.
// The six-values-per-row packing, the bias-add/ReLU step and the per-PE register
// files follow the paper; descriptors, the output shift and the broadcast load bus
// are this design's own. Stimulus changes 1 ns after the rising edge.
`timescale 1ns/1ps
module tb_act_path;
  import masr_pkg::*;
  localparam int N = 24, V = 2, R = N / V, B = 1, G = 6 * B, ROWS = 64, NVEC = 8;
  localparam int NW = $clog2(N), RAW = $clog2(ROWS), VWD = $clog2(NVEC), XW = $clog2(N + 1);
  localparam int RFD = R, RFAW = $clog2(RFD), GW = $clog2(G + 1);

  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // VVAdd
  logic go, dir, vv_busy, b_we, b_dir;
  logic [4:0] out_shift;
  logic [RAW-1:0] row_start, rows_used;
  logic [NW-1:0] b_idx, rd_base;
  logic signed [BIASW-1:0] b_data;
  logic [G-1:0][OUTW-1:0] rd_data;
  logic e_rw_en, e_dw_en;
  logic [RAW-1:0] e_rw_row, e_dw_base;
  logic [G-1:0][AW-1:0] e_rw_data;
  logic [N-1:0] e_dw_mask;
  logic [VWD-1:0] e_dw_vec;

  vvadd_unit #(.N(N), .B(B), .ROWS(ROWS)) u_vv (
    .clk, .rst_n, .go, .dir, .out_shift, .row_start, .busy(vv_busy), .rows_used,
    .b_we, .b_dir, .b_idx, .b_data, .rd_base, .rd_data,
    .rw_en(e_rw_en), .rw_row(e_rw_row), .rw_data(e_rw_data),
    .dw_en(e_dw_en), .dw_mask(e_dw_mask), .dw_base(e_dw_base));

  // store
  logic e_rr_en, e_dr_en, h_rw_en, h_rr_en, h_dw_en, h_dr_en;
  logic [RAW-1:0] e_rr_row, h_rw_row, h_rr_row, h_dw_base, dr_base;
  logic [VWD-1:0] e_dr_vec, h_dw_vec, h_dr_vec;
  logic [G-1:0][AW-1:0] h_rw_data, rr_data;
  logic [N-1:0] h_dw_mask, dr_mask;

  act_store #(.N(N), .B(B), .ROWS(ROWS), .NVEC(NVEC)) u_store (
    .clk, .e_rw_en, .e_rw_row, .e_rw_data, .e_rr_en, .e_rr_row,
    .e_dw_en, .e_dw_vec, .e_dw_mask, .e_dw_base, .e_dr_en, .e_dr_vec,
    .h_rw_en, .h_rw_row, .h_rw_data, .h_rr_en, .h_rr_row,
    .h_dw_en, .h_dw_vec, .h_dw_mask, .h_dw_base, .h_dr_en, .h_dr_vec,
    .rr_data, .dr_mask, .dr_base);

  // loader and register files
  logic ld_go, ld_clear, ld_busy, ld_start, ld_valid;
  logic [VWD-1:0] ld_vec;
  logic [V-1:0][R-1:0] ld_mask;
  logic [V-1:0][XW-1:0] ld_off;
  logic [XW-1:0] ld_idx;
  logic [GW-1:0] ld_cnt;
  logic [G-1:0][AW-1:0] ld_data;

  act_loader #(.N(N), .V(V), .B(B), .ROWS(ROWS), .NVEC(NVEC)) u_ld (
    .clk, .rst_n, .go(ld_go), .clear(ld_clear), .vec(ld_vec), .busy(ld_busy),
    .dr_en(e_dr_en), .dr_vec(e_dr_vec), .dr_mask, .dr_base,
    .rr_en(e_rr_en), .rr_row(e_rr_row), .rr_data,
    .ld_start, .ld_mask, .ld_off, .ld_valid, .ld_idx, .ld_cnt, .ld_data);

  logic [V-1:0][R-1:0] amask;
  logic [V-1:0][RFAW-1:0] rf_addr;
  logic [V-1:0][AW-1:0] rf_data;
  logic [V-1:0] ovf;
  for (genvar v = 0; v < V; v++) begin : g_rf
    act_regfile #(.R(R), .RFD(RFD), .NRD(1), .G(G), .XW(XW)) u_rf (
      .clk, .rst_n, .ld_start, .ld_mask(ld_mask[v]), .ld_off(ld_off[v]), .ld_valid,
      .ld_idx, .ld_cnt, .ld_data, .amask(amask[v]), .rd_addr(rf_addr[v]),
      .rd_data(rf_data[v]), .overflow(ovf[v]));
  end

  // modelled output register file
  int outv [N];
  always_comb
    for (int j = 0; j < G; j++) rd_data[j] = (int'(rd_base) + j < N) ? OUTW'(outv[int'(rd_base) + j]) : '0;

  int bias [2][N];
  int href [N];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int n); return int'($urandom_range(n - 1, 0)); endfunction
  task automatic tick(); @(posedge clk); #1; endtask

  // load a vector into the register files and compare with href
  task automatic load_and_check(int vec, bit clr, string what);
    int k;
    ld_go = 1; ld_clear = clr; ld_vec = VWD'(vec); tick(); ld_go = 0; ld_clear = 0;
    while (ld_busy) tick();
    tick();
    for (int v = 0; v < V; v++) begin
      k = 0;
      for (int i = 0; i < R; i++) begin
        checks++;
        if (amask[v][i] != (href[v*R + i] != 0)) begin
          failures++; $display("FAIL %s: slice %0d mask bit %0d", what, v, i);
        end
        if (href[v*R + i] != 0) begin
          rf_addr[v] = RFAW'(k); #1;
          checks++;
          if (int'($signed(rf_data[v])) != href[v*R + i]) begin
            failures++;
            $display("FAIL %s: slice %0d entry %0d got %0d expected %0d", what, v, k,
                     $signed(rf_data[v]), href[v*R + i]);
          end
          k++;
        end
      end
      checks++;
      if (ovf[v]) begin failures++; $display("FAIL %s: overflow in slice %0d", what, v); end
    end
  endtask

  initial begin
    int row, nz;
    {go, dir, b_we, b_dir, ld_go, ld_clear, h_rw_en, h_rr_en, h_dw_en, h_dr_en} = '0;
    out_shift = 2; row_start = '0; b_idx = '0; b_data = '0; e_dw_vec = '0; ld_vec = '0;
    h_rw_row = '0; h_rr_row = '0; h_dw_base = '0; h_dw_vec = '0; h_dr_vec = '0;
    h_rw_data = '0; h_dw_mask = '0; rf_addr = '0;
    foreach (outv[i]) outv[i] = 0;
    rst_n = 0;
    repeat (2) tick();
    rst_n = 1;
    for (int d = 0; d < 2; d++)
      for (int c = 0; c < N; c++) begin
        bias[d][c] = rnd(601) - 300;
        b_we = 1; b_dir = d[0]; b_idx = NW'(c); b_data = BIASW'(bias[d][c]); tick();
      end
    b_we = 0;
    row = 0;
    for (int it = 0; it < 5; it++) begin
      int pct;
      pct = (it == 4) ? 100 : 30 + 15 * it;     // the last vector is fully dense
      dir = it[0];
      nz = 0;
      for (int c = 0; c < N; c++) begin
        outv[c] = (rnd(100) < pct) ? rnd(4000) + 400 : -(rnd(4000) + 400);
        href[c] = relu_ref(outv[c] + bias[it % 2][c], 2);
        if (href[c] != 0) nz++;
      end
      e_dw_vec = VWD'(it); row_start = RAW'(row);
      go = 1; tick(); go = 0;
      while (vv_busy) tick();
      checks++;
      if (int'(rows_used) != (nz + G - 1) / G) begin
        failures++; $display("FAIL vector %0d: %0d rows used for %0d non-zeros", it, rows_used, nz);
      end
      row += int'(rows_used);
      load_and_check(it, 0, $sformatf("vector %0d", it));
    end
    // vectors written earlier are still intact
    for (int c = 0; c < N; c++) href[c] = relu_ref(outv[c] + bias[0][c], 2);
    load_and_check(4, 0, "reload of vector 4");
    // all-zero clear load
    foreach (href[c]) href[c] = 0;
    load_and_check(0, 1, "clear");
    // a vector written by the host
    nz = 0;
    for (int c = 0; c < N; c++) begin href[c] = (c % 3 == 1) ? c + 1 : -(c % 5) * (c % 3 == 2); end
    for (int c = 0; c < N; c++) if (href[c] != 0) nz++;
    begin
      int k;
      logic [G-1:0][AW-1:0] wd;
      k = 0; wd = '0;
      for (int c = 0; c < N; c++) if (href[c] != 0) begin
        wd[k % G] = AW'(href[c]);
        k++;
        if (k % G == 0 || k == nz) begin
          h_rw_en = 1; h_rw_row = RAW'(40 + (k - 1) / G); h_rw_data = wd; tick(); h_rw_en = 0; wd = '0;
        end
      end
      h_dw_en = 1; h_dw_vec = VWD'(7); h_dw_base = RAW'(40);
      for (int c = 0; c < N; c++) h_dw_mask[c] = (href[c] != 0);
      tick(); h_dw_en = 0;
    end
    load_and_check(7, 0, "host vector");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int relu_ref(int s, int sh);
    int q;
    if (s <= 0) return 0;
    q = s >>> sh;
    return (q > 511) ? 511 : q;
  endfunction
endmodule
