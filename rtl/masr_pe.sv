// masr_pe: processing element, a row of LPE horizontal lanes sharing one compact
// activation register file.
//
// All lanes of a PE work on the same vertical slice of the input vector (R rows)
// and on different output columns, so they share the slice's activation mask and
// compact activations; each lane has its own weight and weight-mask SRAMs, its own
// pipeline and its own back end queue, and runs decoupled from the others. A pass
// is started on all lanes at once; `busy[l]` tells when lane l has pushed its last
// partial sum. The per-lane ports are simply gathered into arrays. Structure as in
// the paper; port grouping is this design's.
module masr_pe
  import masr_pkg::*;
#(
  parameter int unsigned R      = 400,
  parameter int unsigned C      = 50,
  parameter int unsigned LPE    = 8,
  parameter int unsigned WDEPTH = 16384,
  parameter int unsigned MDEPTH = 100,
  parameter int unsigned RFD    = 256,
  parameter int unsigned QDEPTH = 1,
  parameter int unsigned G      = 6,
  parameter int unsigned XW     = 10,
  localparam int unsigned WAW   = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned MAW   = (MDEPTH > 1) ? $clog2(MDEPTH) : 1,
  localparam int unsigned GW    = $clog2(G + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 mat,
  input  logic                 bank,
  input  logic [LPE-1:0][C-1:0] skip,
  output logic [LPE-1:0]       busy,
  // register file load
  input  logic                 ld_start,
  input  logic [R-1:0]         ld_mask,
  input  logic [XW-1:0]        ld_off,
  input  logic                 ld_valid,
  input  logic [XW-1:0]        ld_idx,
  input  logic [GW-1:0]        ld_cnt,
  input  logic [G-1:0][AW-1:0] ld_data,
  output logic                 rf_overflow,
  // weight / mask loading, one write enable per lane
  input  logic [LPE-1:0]       w_we,
  input  logic                 w_bank,
  input  logic [WAW-1:0]       w_addr,
  input  logic [WW-1:0]        w_data,
  input  logic [LPE-1:0]       m_we,
  input  logic                 m_bank,
  input  logic [MAW-1:0]       m_addr,
  input  logic [R-1:0]         m_data,
  // queues
  input  logic [LPE-1:0]       q_pop,
  output psum_t [LPE-1:0]      q_dout,
  output logic [LPE-1:0]       q_empty,
  output logic [LPE-1:0]       stall,
  output logic [LPE-1:0]       mac_fire
);
  localparam int unsigned RFAW = (RFD > 1) ? $clog2(RFD) : 1;
  logic [R-1:0]                amask;
  logic [LPE-1:0][RFAW-1:0]    rd_addr;
  logic [LPE-1:0][AW-1:0]      rd_data;

  act_regfile #(.R(R), .RFD(RFD), .NRD(LPE), .G(G), .XW(XW)) u_rf (
    .clk, .rst_n, .ld_start, .ld_mask, .ld_off, .ld_valid, .ld_idx, .ld_cnt, .ld_data,
    .amask, .rd_addr, .rd_data, .overflow(rf_overflow));

  for (genvar l = 0; l < LPE; l++) begin : g_lane
    masr_lane #(.R(R), .C(C), .WDEPTH(WDEPTH), .MDEPTH(MDEPTH), .RFD(RFD), .QDEPTH(QDEPTH)) u_lane (
      .clk, .rst_n, .start, .mat, .bank, .skip(skip[l]), .busy(busy[l]),
      .amask, .rf_addr(rd_addr[l]), .rf_data($signed(rd_data[l])),
      .w_we(w_we[l]), .w_bank, .w_addr, .w_data,
      .m_we(m_we[l]), .m_bank, .m_addr, .m_data,
      .q_pop(q_pop[l]), .q_dout(q_dout[l]), .q_empty(q_empty[l]),
      .stall(stall[l]), .mac_fire(mac_fire[l]));
  end
endmodule
