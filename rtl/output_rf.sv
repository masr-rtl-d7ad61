// output_rf: the N-entry output register file (N = 800 hidden units).
//
// Each entry holds the running value of one output neuron for the current time
// step: the W_h pass writes the hidden intermediates, the W_x passes add the input
// intermediates. Entry c is written only by horizontal lane position c mod H, so the
// file behaves as H independent banks written in parallel. The VVAdd unit reads G
// consecutive entries per cycle (entries past N read as zero). The file also
// produces the output-predication vector: on `op_capture` (issued right after the
// W_h pass) entry c is flagged when its value, the hidden intermediate, is below
// `op_thr`; the flags are held for the rest of the time step and the controller
// uses them to skip that column's W_x work. The register
// file and its 800 entries are the paper's; banking, the read window and the
// comparison against a programmable threshold are this design's choices.
module output_rf
  import masr_pkg::*;
#(
  parameter int unsigned N  = 800,
  parameter int unsigned H  = 16,
  parameter int unsigned G  = 6,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                     clk,
  input  logic [H-1:0]             wr_en,
  input  logic [H-1:0][NW-1:0]     wr_idx,
  input  logic [H-1:0][OUTW-1:0]   wr_val,
  input  logic [H-1:0]             wr_add,
  input  logic [NW-1:0]            rd_base,
  output logic [G-1:0][OUTW-1:0]   rd_data,
  input  logic signed [OUTW-1:0]   op_thr,
  input  logic                     op_capture,
  output logic [N-1:0]             below_thr
);
  logic signed [OUTW-1:0] mem [N];

  always_ff @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (wr_en[c % H] && wr_idx[c % H] == NW'(c))
        mem[c] <= wr_add[c % H] ? mem[c] + $signed(wr_val[c % H]) : $signed(wr_val[c % H]);
    end
  end

  always_comb begin
    for (int j = 0; j < G; j++) begin
      rd_data[j] = '0;
      if (int'(rd_base) + j < N) rd_data[j] = mem[int'(rd_base) + j];
    end
  end

  always_ff @(posedge clk) begin
    if (op_capture)
      for (int c = 0; c < N; c++) below_thr[c] <= (mem[c] < op_thr);
  end
endmodule
