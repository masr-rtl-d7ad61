// psum_fifo: the back end queue between a lane and its partial-sum accumulator.
//
// A lane pushes one partial sum per finished output column; the accumulator pops
// when every lane of the vertical slice has one ready. When the queue is full the
// lane stalls (back pressure). The paper evaluates depth 1 and sweeps 1..8; depth is
// the DEPTH parameter. Valid/ready on both sides: a push happens when push && !full,
// a pop when pop && !empty. A full queue accepts a push in the cycle it is popped.
module psum_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rptr, wptr;
  logic [PW:0]      count;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign do_pop  = pop && !empty;
  assign full    = (count == (PW+1)'(DEPTH)) && !do_pop;
  assign do_push = push && !full;
  assign dout    = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + PW'(1);
      if (do_pop) rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + PW'(1);
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH));
endmodule
