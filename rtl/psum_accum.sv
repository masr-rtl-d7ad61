// psum_accum: partial-sum accumulator of one horizontal lane position.
//
// Output column c = k*H + HIDX is computed by the V lanes (one per vertical PE) at
// horizontal position HIDX, each over its slice of input rows. When all V back end
// queues hold the partial sum of column k, the accumulator pops them together, adds
// the positive-weight sums and the negative-weight sums across the slices, applies
// the two per-sign scale factors and writes the result to the output register file
// (overwrite for the W_h pass, add for the W_x passes). Lanes whose queue is full
// wait, which is the back pressure the paper describes. One column per cycle.
// `start` clears the column counter; `done` is high once all C columns are written.
// The interleaved column assignment is read from the paper's topology figure (lane 0
// of the first PE holds column 1, lane 1 column 2, ...); scale arithmetic is this
// design's choice.
module psum_accum
  import masr_pkg::*;
#(
  parameter int unsigned V    = 2,
  parameter int unsigned C    = 50,
  parameter int unsigned H    = 16,
  parameter int unsigned HIDX = 0,
  parameter int unsigned N    = 800,
  localparam int unsigned NW  = $clog2(N),
  localparam int unsigned KW  = $clog2(C + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  out_mode_e             mode,
  input  logic [SCALEW-1:0]     scale_pos,
  input  logic [SCALEW-1:0]     scale_neg,
  input  logic [V-1:0]          q_empty,
  input  psum_t [V-1:0]         q_dout,
  output logic [V-1:0]          q_pop,
  output logic                  wr_en,
  output logic [NW-1:0]         wr_idx,
  output logic signed [OUTW-1:0] wr_val,
  output logic                  wr_add,
  output logic                  done
);
  logic [KW-1:0] k;
  logic          fire;
  logic signed [ACCW+7:0] sum_pos, sum_neg;

  assign fire  = (q_empty == '0) && (k < KW'(C));
  assign q_pop = {V{fire}};
  assign done  = (k == KW'(C));

  always_comb begin
    sum_pos = '0;
    sum_neg = '0;
    for (int v = 0; v < V; v++) begin
      sum_pos = sum_pos + (ACCW+8)'(q_dout[v].pos);
      sum_neg = sum_neg + (ACCW+8)'(q_dout[v].neg);
    end
  end

  assign wr_en  = fire;
  assign wr_idx = NW'(k * H + HIDX);
  assign wr_val = scale_psum(sum_pos, sum_neg, scale_pos, scale_neg);
  assign wr_add = (mode == OUT_ADD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     k <= KW'(C);
    else if (start) k <= '0;
    else if (fire)  k <= k + KW'(1);
  end
endmodule
