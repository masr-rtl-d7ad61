// tb_out_path: the output side of the array at reduced size: H=3 horizontal positions,
// each a psum_accum summing V=2 modelled back end queues (random availability), all
// writing the banked output register file (N=12). Runs an overwrite pass followed by
// an add pass with different scale factors, then checks every output entry, the read
// window (including entries past N, which read as zero), the done flags, the pop
// pattern (all V queues popped together only when all are non-empty), and the
// output-predication compare captured against a threshold.
// Serves as the testbench of psum_accum and output_rf.
// Summing the vertical lanes per column and the output predication compare follow
// the paper; the Q2.8 scale factors, the k*H+h column order and the banked write
// ports are this design's own. Stimulus changes 1 ns after the rising edge.
`timescale 1ns/1ps
module tb_out_path;
  import masr_pkg::*;
  localparam int V = 2, H = 3, C = 4, N = H * C, G = 6, NW = $clog2(N);

  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start;
  out_mode_e mode;
  logic [SCALEW-1:0] sp, sn;
  logic [H-1:0][V-1:0] q_empty, q_pop;
  psum_t [H-1:0][V-1:0] q_dout;
  logic [H-1:0] wr_en, wr_add, done;
  logic [H-1:0][NW-1:0] wr_idx;
  logic [H-1:0][OUTW-1:0] wr_val;
  logic [NW-1:0] rd_base;
  logic [G-1:0][OUTW-1:0] rd_data;
  logic signed [OUTW-1:0] op_thr;
  logic op_capture;
  logic [N-1:0] below_thr;

  for (genvar h = 0; h < H; h++) begin : g_acc
    logic signed [OUTW-1:0] val;
    psum_accum #(.V(V), .C(C), .H(H), .HIDX(h), .N(N)) u_acc (
      .clk, .rst_n, .start, .mode, .scale_pos(sp), .scale_neg(sn),
      .q_empty(q_empty[h]), .q_dout(q_dout[h]), .q_pop(q_pop[h]),
      .wr_en(wr_en[h]), .wr_idx(wr_idx[h]), .wr_val(val), .wr_add(wr_add[h]), .done(done[h]));
    assign wr_val[h] = val;
  end

  output_rf #(.N(N), .H(H), .G(G)) u_rf (
    .clk, .wr_en, .wr_idx, .wr_val, .wr_add, .rd_base, .rd_data, .op_thr, .op_capture, .below_thr);

  // modelled queues: column k of position h from lane v is psum[h][v][k]
  int pp [H][V][C], pn [H][V][C];
  int ptr [H][V];
  bit avail [H][V];
  int bad_pops = 0;

  always_comb
    for (int h = 0; h < H; h++)
      for (int v = 0; v < V; v++) begin
        q_empty[h][v] = !(avail[h][v] && ptr[h][v] < C);
        q_dout[h][v].pos = (ptr[h][v] < C) ? ACCW'(pp[h][v][ptr[h][v]]) : '0;
        q_dout[h][v].neg = (ptr[h][v] < C) ? ACCW'(pn[h][v][ptr[h][v]]) : '0;
      end

  always @(posedge clk)
    for (int h = 0; h < H; h++)
      for (int v = 0; v < V; v++)
        if (q_pop[h][v]) begin
          if (q_empty[h] != '0) bad_pops++;
          ptr[h][v] <= ptr[h][v] + 1;
        end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int n); return int'($urandom_range(n - 1, 0)); endfunction
  task automatic tick(); @(posedge clk); #1; endtask

  function automatic longint scl(longint p, longint n, int a, int b);
    return (p * a + n * b) >>> SCALE_SHIFT;
  endfunction

  longint ref_out [N];

  task automatic run(out_mode_e md, int a, int b);
    int cyc;
    for (int h = 0; h < H; h++)
      for (int v = 0; v < V; v++) begin
        ptr[h][v] = 0;
        for (int k = 0; k < C; k++) begin
          pp[h][v][k] = rnd(20000);
          pn[h][v][k] = -rnd(20000);
        end
      end
    for (int h = 0; h < H; h++)
      for (int k = 0; k < C; k++) begin
        longint p, n;
        p = 0; n = 0;
        for (int v = 0; v < V; v++) begin p += pp[h][v][k]; n += pn[h][v][k]; end
        if (md == OUT_WRITE) ref_out[k*H + h] = scl(p, n, a, b);
        else ref_out[k*H + h] += scl(p, n, a, b);
      end
    mode = md; sp = SCALEW'(a); sn = SCALEW'(b);
    start = 1; tick(); start = 0;
    checks++;
    if (done != '0) begin failures++; $display("FAIL done raised right after start"); end
    cyc = 0;
    while (done != '1 && cyc < 1000) begin
      for (int h = 0; h < H; h++) for (int v = 0; v < V; v++) avail[h][v] = (rnd(100) < 60);
      tick();
      cyc++;
    end
    checks++;
    if (done != '1) begin failures++; $display("FAIL accumulators not done"); end
  endtask

  initial begin
    start = 0; mode = OUT_WRITE; sp = '0; sn = '0; rd_base = '0; op_thr = '0; op_capture = 0;
    foreach (avail[h, v]) avail[h][v] = 0;
    foreach (ptr[h, v]) ptr[h][v] = C;
    rst_n = 0;
    repeat (2) tick();
    rst_n = 1;
    run(OUT_WRITE, 256, 224);
    run(OUT_ADD, 192, 256);
    for (int base = 0; base < N; base += 2) begin
      rd_base = NW'(base); #1;
      for (int j = 0; j < G; j++) begin
        checks++;
        if (base + j < N) begin
          if ($signed(rd_data[j]) != OUTW'(ref_out[base + j])) begin
            failures++;
            $display("FAIL entry %0d: got %0d expected %0d", base + j, $signed(rd_data[j]), ref_out[base + j]);
          end
        end else if (rd_data[j] != '0) begin
          failures++; $display("FAIL read past N at %0d is not zero", base + j);
        end
      end
    end
    // predication compare against the median-ish value
    op_thr = OUTW'(ref_out[N / 2]);
    op_capture = 1; tick(); op_capture = 0;
    for (int c = 0; c < N; c++) begin
      checks++;
      if (below_thr[c] != (ref_out[c] < ref_out[N / 2])) begin
        failures++; $display("FAIL predication flag %0d", c);
      end
    end
    checks++;
    if (bad_pops != 0) begin failures++; $display("FAIL %0d pops with an empty queue", bad_pops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
