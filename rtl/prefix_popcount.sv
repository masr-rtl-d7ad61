// prefix_popcount: number of ones in `mask` strictly below element `idx`.
//
// This is how a compactly stored (non-zeros only) weight or activation is
// addressed: its position among the stored non-zeros equals the count of mask
// ones ahead of it. In the paper's example, counting the weight mask 0,0,1,1 and
// the activation mask 1,1,1,0 up to index 2 gives addresses 0 and 2.
// Combinational; the adder structure is left to synthesis.
module prefix_popcount #(
  parameter int unsigned W  = 400,
  parameter int unsigned IW = (W > 1) ? $clog2(W) : 1,
  parameter int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  mask,
  input  logic [IW-1:0] idx,
  output logic [CW-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < W; i++) begin
      if (i < int'(idx) && mask[i]) count = count + CW'(1);
    end
  end
endmodule
