// sram_1r1w: synchronous single-read, single-write SRAM model.
//
// Stands for the compiled SRAM macros of the design (compact weight, weight mask
// and compact activation memories). A read issued with `re` returns `rdata` on the
// next clock edge; `rdata` holds its value while `re` is low, which lets a stalled
// pipeline keep the word it already read. A write and a read of the same address in
// one cycle return the old word. Written as a plain array so it synthesises to a
// memory; contents are not reset (the memories are loaded before use).
module sram_1r1w #(
  parameter int unsigned WIDTH = 10,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AWID  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AWID-1:0]  waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AWID-1:0]  raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
