// tb_sram_1r1w: random writes and reads against an array model; checks the one
// cycle read latency, that the output holds while no read is issued, and that a
// read of the address being written returns the old word.
// The memory model and its timing are this design's own (the paper uses compiled
// SRAM macros and does not give their timing). Stimulus changes on the falling edge.
`timescale 1ns/1ps
module tb_sram_1r1w;
  localparam int WIDTH = 10, DEPTH = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram_1r1w #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] expect_q;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 6'($urandom % DEPTH); wdata = WIDTH'($urandom);
      re = 1'($urandom); raddr = (n % 7 == 0) ? waddr : 6'($urandom % DEPTH);
      if (re) expect_q = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        $display("FAIL n=%0d rdata=%h expected %h", n, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
