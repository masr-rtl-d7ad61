// lnzd: leading non-zero detect over a work mask.
//
// Returns the index of the lowest-numbered set bit of `mask` (element 0 is bit 0),
// which is the next non-zero weight/activation pair a lane works on, and flags an
// all-zero mask. In the paper's worked example the work mask 0,0,1,0 (elements
// 0..3) gives index 2, so the search starts from element 0. Purely combinational,
// one cycle as in the paper's back end stage 1; a simple priority scan is used,
// the paper does not describe the circuit.
module lnzd #(
  parameter int unsigned W  = 400,
  parameter int unsigned IW = (W > 1) ? $clog2(W) : 1
) (
  input  logic [W-1:0]  mask,
  output logic [IW-1:0] idx,
  output logic          found
);
  always_comb begin
    idx   = '0;
    found = 1'b0;
    for (int i = W - 1; i >= 0; i--) begin
      if (mask[i]) begin
        idx   = IW'(i);
        found = 1'b1;
      end
    end
  end
endmodule
