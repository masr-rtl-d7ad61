// tb_prefix_popcount: checks the sparse address computation on the paper's example
// (weight mask 0,0,1,1 and activation mask 1,1,1,0 counted below index 2 give
// addresses 0 and 2) and on random masks and indices.
// The example values are the paper's; everything else here is this testbench's own.
// Combinational DUT: each check applies mask and index and compares after 1 ns.
`timescale 1ns/1ps
module tb_prefix_popcount;
  localparam int W = 37;
  logic [W-1:0] mask;
  logic [5:0]   idx;
  logic [5:0]   count;
  int checks = 0, failures = 0;

  prefix_popcount #(.W(W)) u_dut (.mask, .idx, .count);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int e;
    e = 0;
    for (int i = 0; i < int'(idx); i++) if (mask[i]) e++;
    #1;
    checks++;
    if (int'(count) != e) begin
      failures++;
      $display("FAIL mask=%h idx=%0d count=%0d expected %0d", mask, idx, count, e);
    end
  endtask

  initial begin
    mask = '0; mask[2] = 1; mask[3] = 1; idx = 2; #1;
    checks++; if (count != 0) begin failures++; $display("FAIL weight example"); end
    mask = '0; mask[0] = 1; mask[1] = 1; mask[2] = 1; idx = 2; #1;
    checks++; if (count != 2) begin failures++; $display("FAIL activation example"); end
    for (int n = 0; n < 600; n++) begin
      mask = {$urandom, $urandom};
      idx  = 6'($urandom % W);
      check();
    end
    mask = '1; idx = 6'(W - 1); check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
