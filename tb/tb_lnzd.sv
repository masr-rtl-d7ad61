// tb_lnzd: checks the leading non-zero detect on the paper's example (work mask
// 0,0,1,0 gives index 2), on every one-hot and all-zero mask, and on random masks,
// against a reference scan.
// The expected index comes from the paper's example; the random masks and the
// bit order (element 0 = bit 0) are this testbench's own choice. Combinational DUT:
// each check applies a mask and compares after a 1 ns settle.
`timescale 1ns/1ps
module tb_lnzd;
  localparam int W = 40;
  logic [W-1:0] mask;
  logic [5:0]   idx;
  logic         found;
  int checks = 0, failures = 0;

  lnzd #(.W(W)) u_dut (.mask, .idx, .found);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int exp_idx;
    bit exp_found;
    exp_idx = 0; exp_found = 0;
    for (int i = 0; i < W; i++) if (mask[i] && !exp_found) begin exp_idx = i; exp_found = 1; end
    #1;
    checks++;
    if (found !== exp_found || (exp_found && int'(idx) != exp_idx)) begin
      failures++;
      $display("FAIL mask=%h idx=%0d found=%0d expected %0d/%0d", mask, idx, found, exp_idx, exp_found);
    end
  endtask

  initial begin
    mask = '0; mask[2] = 1'b1;              // paper example
    #1; checks++;
    if (idx != 2 || !found) begin failures++; $display("FAIL paper example"); end
    mask = '0; check();
    for (int i = 0; i < W; i++) begin mask = '0; mask[i] = 1'b1; check(); end
    for (int n = 0; n < 500; n++) begin
      mask = {$urandom, $urandom};
      if (n % 3 == 0) mask = mask & {$urandom, $urandom} & {$urandom, $urandom};
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
