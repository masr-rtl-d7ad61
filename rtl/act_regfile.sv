// act_regfile: compact activation register file of one PE.
//
// Holds the non-zero activations of the PE's vertical slice (R input rows) packed
// at addresses 0,1,2,... in row order, together with the slice's R-bit activation
// mask. All lanes of the PE read it in parallel (one combinational read port per
// lane), as the lanes of a PE share one physical register file in the paper. It is
// loaded from the compact activation SRAM by the activation loader: `ld_start`
// gives the slice's mask and `ld_off`, the number of non-zeros of the whole vector
// that precede the slice; then each `ld_valid` beat carries up to G consecutive
// non-zeros of the whole vector starting at compact index `ld_idx`, and the file
// keeps those that belong to its slice.
//
// The depth follows the paper's sizing (64 words for 100 rows, 16 for 25, i.e.
// 0.64 of the rows: 256 for 400 rows). A slice with more non-zeros than the depth
// cannot be held; `overflow` then stays set until the next load and the excess is
// dropped. Loading and reset behaviour are this design's choices.
module act_regfile
  import masr_pkg::*;
#(
  parameter int unsigned R    = 400,
  parameter int unsigned RFD  = 256,
  parameter int unsigned NRD  = 8,     // read ports (lanes per PE)
  parameter int unsigned G    = 6,     // non-zeros per load beat
  parameter int unsigned XW   = 10,    // width of a compact index into the whole vector
  localparam int unsigned RFAW = (RFD > 1) ? $clog2(RFD) : 1,
  localparam int unsigned GW   = $clog2(G + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ld_start,
  input  logic [R-1:0]         ld_mask,
  input  logic [XW-1:0]        ld_off,
  input  logic                 ld_valid,
  input  logic [XW-1:0]        ld_idx,
  input  logic [GW-1:0]        ld_cnt,
  input  logic [G-1:0][AW-1:0] ld_data,
  output logic [R-1:0]         amask,
  input  logic [NRD-1:0][RFAW-1:0] rd_addr,
  output logic [NRD-1:0][AW-1:0]   rd_data,
  output logic                 overflow
);
  logic [AW-1:0] mem [RFD];
  logic [XW-1:0] off;
  logic [XW-1:0] cnt;
  logic [XW-1:0] ones;

  always_comb begin
    ones = '0;
    for (int i = 0; i < R; i++) ones = ones + XW'(ld_mask[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      amask    <= '0;
      off      <= '0;
      cnt      <= '0;
      overflow <= 1'b0;
    end else if (ld_start) begin
      amask    <= ld_mask;
      off      <= ld_off;
      cnt      <= ones;
      overflow <= (ones > XW'(RFD));
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid) begin
      for (int j = 0; j < G; j++) begin
        logic [XW-1:0] gi, li;
        gi = ld_idx + XW'(j);
        li = gi - off;
        if (GW'(j) < ld_cnt && gi >= off && li < cnt && li < XW'(RFD))
          mem[RFAW'(li)] <= ld_data[j];
      end
    end
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rd_data[p] = mem[rd_addr[p]];
  end
endmodule
