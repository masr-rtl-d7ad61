// tb_psum_fifo: random pushes and pops against a queue model at depth 1 (the
// paper's evaluated setting) and depth 3; checks data order, full/empty flags and
// that a full queue accepts a push in the cycle it is popped.
// Depth 1 follows the paper's evaluated design; depth 3 and the random traffic are
// this testbench's own. Stimulus changes on the falling edge, checks on the rising.
`timescale 1ns/1ps
module tb_psum_fifo;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        push1, pop1, full1, empty1, push3, pop3, full3, empty3;
  logic [15:0] din, dout1, dout3;

  psum_fifo #(.WIDTH(16), .DEPTH(1)) u_d1 (.clk, .rst_n, .push(push1), .din, .full(full1),
                                          .pop(pop1), .dout(dout1), .empty(empty1));
  psum_fifo #(.WIDTH(16), .DEPTH(3)) u_d3 (.clk, .rst_n, .push(push3), .din, .full(full3),
                                          .pop(pop3), .dout(dout3), .empty(empty3));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] q1 [$], q3 [$];
  int through_full = 0;

  initial begin
    rst_n = 0; push1 = 0; pop1 = 0; push3 = 0; pop3 = 0; din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      din = 16'($urandom);
      push1 = 1'($urandom); pop1 = 1'($urandom);
      push3 = 1'($urandom); pop3 = ($urandom % 3) == 0;
      #1;
      // flags against the models
      checks++;
      if (empty1 != (q1.size() == 0) || empty3 != (q3.size() == 0)) begin
        failures++; $display("FAIL empty flag at %0d", n);
      end
      checks++;
      if (full1 != (q1.size() == 1 && !pop1) || full3 != (q3.size() == 3 && !pop3)) begin
        failures++; $display("FAIL full flag at %0d", n);
      end
      if (q1.size() != 0) begin
        checks++;
        if (dout1 != q1[0]) begin failures++; $display("FAIL d1 data at %0d", n); end
      end
      if (q3.size() != 0) begin
        checks++;
        if (dout3 != q3[0]) begin failures++; $display("FAIL d3 data at %0d", n); end
      end
      if (q1.size() == 1 && pop1 && push1) through_full++;
      // model update in the order the hardware does it
      begin
        bit do_pop1, do_pop3, do_push1, do_push3;
        do_pop1  = pop1 && q1.size() != 0;
        do_pop3  = pop3 && q3.size() != 0;
        do_push1 = push1 && !(q1.size() == 1 && !do_pop1);
        do_push3 = push3 && !(q3.size() == 3 && !do_pop3);
        if (do_pop1) void'(q1.pop_front());
        if (do_pop3) void'(q3.pop_front());
        if (do_push1) q1.push_back(din);
        if (do_push3) q3.push_back(din);
      end
    end
    checks++;
    if (through_full == 0) begin failures++; $display("push into a full queue being popped never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
