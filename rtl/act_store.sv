// act_store: compact activation storage.
//
// Activation vectors (layer inputs x^t and hidden states h^t, g^t) are kept in
// compressed form: an N-bit mask per vector, and the vector's non-zeros packed in
// order into 60-bit SRAM words of six activations. With B banks a row is B words
// wide (one word per bank, all banks at the same row address), so a row carries
// G = 6*B activations and the VVAdd unit and the loader move G activations per
// cycle; one bank limits them to six per cycle as in the paper. Each vector also
// has a descriptor entry holding its mask and the row at which its values start
// (a vector starts on a row boundary). Vectors are numbered region*TMAX + t.
//
// Two requesters share each port: the accelerator's engine (loader, VVAdd unit)
// and the host, the engine having priority. All reads are synchronous with one
// cycle of latency. Sizes: ROWS defaults to 450 KB / (60 bits * B), the paper's
// on-chip activation capacity; descriptors are extra. The descriptor table and the
// row-aligned layout are this design's choices.
module act_store
  import masr_pkg::*;
#(
  parameter int unsigned N     = 800,
  parameter int unsigned B     = 1,
  parameter int unsigned ROWS  = 61440,
  parameter int unsigned NVEC  = 1332,
  localparam int unsigned G    = VALS_PER_WORD * B,
  localparam int unsigned RAW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned VW   = (NVEC > 1) ? $clog2(NVEC) : 1
) (
  input  logic                 clk,
  // engine row ports
  input  logic                 e_rw_en,
  input  logic [RAW-1:0]       e_rw_row,
  input  logic [G-1:0][AW-1:0] e_rw_data,
  input  logic                 e_rr_en,
  input  logic [RAW-1:0]       e_rr_row,
  // engine descriptor ports
  input  logic                 e_dw_en,
  input  logic [VW-1:0]        e_dw_vec,
  input  logic [N-1:0]         e_dw_mask,
  input  logic [RAW-1:0]       e_dw_base,
  input  logic                 e_dr_en,
  input  logic [VW-1:0]        e_dr_vec,
  // host ports
  input  logic                 h_rw_en,
  input  logic [RAW-1:0]       h_rw_row,
  input  logic [G-1:0][AW-1:0] h_rw_data,
  input  logic                 h_rr_en,
  input  logic [RAW-1:0]       h_rr_row,
  input  logic                 h_dw_en,
  input  logic [VW-1:0]        h_dw_vec,
  input  logic [N-1:0]         h_dw_mask,
  input  logic [RAW-1:0]       h_dw_base,
  input  logic                 h_dr_en,
  input  logic [VW-1:0]        h_dr_vec,
  // read data (shared by both requesters)
  output logic [G-1:0][AW-1:0] rr_data,
  output logic [N-1:0]         dr_mask,
  output logic [RAW-1:0]       dr_base
);
  logic                 rw_en, rr_en, dw_en, dr_en;
  logic [RAW-1:0]       rw_row, rr_row;
  logic [G-1:0][AW-1:0] rw_data;
  logic [VW-1:0]        dw_vec, dr_vec;
  logic [N+RAW-1:0]     dw_word, dr_word;

  assign rw_en   = e_rw_en || h_rw_en;
  assign rw_row  = e_rw_en ? e_rw_row  : h_rw_row;
  assign rw_data = e_rw_en ? e_rw_data : h_rw_data;
  assign rr_en   = e_rr_en || h_rr_en;
  assign rr_row  = e_rr_en ? e_rr_row  : h_rr_row;
  assign dw_en   = e_dw_en || h_dw_en;
  assign dw_vec  = e_dw_en ? e_dw_vec  : h_dw_vec;
  assign dw_word = e_dw_en ? {e_dw_mask, e_dw_base} : {h_dw_mask, h_dw_base};
  assign dr_en   = e_dr_en || h_dr_en;
  assign dr_vec  = e_dr_en ? e_dr_vec  : h_dr_vec;

  for (genvar b = 0; b < B; b++) begin : g_bank
    sram_1r1w #(.WIDTH(ACT_WORD_W), .DEPTH(ROWS)) u_bank (
      .clk, .we(rw_en), .waddr(rw_row), .wdata(rw_data[b*VALS_PER_WORD +: VALS_PER_WORD]),
      .re(rr_en), .raddr(rr_row), .rdata(rr_data[b*VALS_PER_WORD +: VALS_PER_WORD]));
  end

  sram_1r1w #(.WIDTH(N + RAW), .DEPTH(NVEC)) u_desc (
    .clk, .we(dw_en), .waddr(dw_vec), .wdata(dw_word),
    .re(dr_en), .raddr(dr_vec), .rdata(dr_word));

  assign dr_mask = dr_word[N+RAW-1:RAW];
  assign dr_base = dr_word[RAW-1:0];
endmodule
