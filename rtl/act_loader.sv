// act_loader: moves one compact activation vector from the activation SRAM into
// the compact activation register files of the PEs.
//
// On `go` it reads the vector's descriptor (mask and start row), splits the mask
// into the V vertical slices of R rows, and tells every register file its slice
// mask and how many of the vector's non-zeros precede the slice (`ld_start`). It
// then streams the ceil(nnz/G) rows holding the packed non-zeros, one row per
// cycle; each register file keeps the values of its own slice. With `clear` it
// loads an all-zero vector instead (the hidden state before the first time step)
// without touching the SRAM. `busy` is set by `go` and falls when the last row has
// been delivered: 2 + ceil(nnz/G) cycles, 1 cycle for `clear`. The paper states
// only that the previous hidden state and the inputs are loaded from the compact
// activation SRAM into the register files; how is this design's choice.
module act_loader
  import masr_pkg::*;
#(
  parameter int unsigned N    = 800,
  parameter int unsigned V    = 2,
  parameter int unsigned B    = 1,
  parameter int unsigned ROWS = 61440,
  parameter int unsigned NVEC = 1332,
  localparam int unsigned R   = N / V,
  localparam int unsigned G   = VALS_PER_WORD * B,
  localparam int unsigned GW  = $clog2(G + 1),
  localparam int unsigned XW  = $clog2(N + 1),
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned VW  = (NVEC > 1) ? $clog2(NVEC) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 go,
  input  logic                 clear,
  input  logic [VW-1:0]        vec,
  output logic                 busy,
  // activation store
  output logic                 dr_en,
  output logic [VW-1:0]        dr_vec,
  input  logic [N-1:0]         dr_mask,
  input  logic [RAW-1:0]       dr_base,
  output logic                 rr_en,
  output logic [RAW-1:0]       rr_row,
  input  logic [G-1:0][AW-1:0] rr_data,
  // register file load bus
  output logic                 ld_start,
  output logic [V-1:0][R-1:0]  ld_mask,
  output logic [V-1:0][XW-1:0] ld_off,
  output logic                 ld_valid,
  output logic [XW-1:0]        ld_idx,
  output logic [GW-1:0]        ld_cnt,
  output logic [G-1:0][AW-1:0] ld_data
);
  typedef enum logic [1:0] {L_IDLE, L_DESC, L_ROWS} lstate_e;
  lstate_e       st;
  logic          clear_q;
  logic [XW-1:0] total, issued;
  logic [RAW-1:0] base;
  logic          pend;
  logic [XW-1:0] pend_idx;
  logic [V-1:0][XW-1:0] off_c;
  logic [XW-1:0] total_c;

  // slice offsets: non-zeros of the vector ahead of each slice
  always_comb begin
    logic [XW-1:0] acc;
    acc = '0;
    for (int v = 0; v < V; v++) begin
      off_c[v] = acc;
      for (int i = 0; i < R; i++) acc = acc + XW'(dr_mask[v*R + i]);
    end
    total_c = acc;
  end

  assign dr_en    = go && !clear;
  assign dr_vec   = vec;
  assign ld_start = (st == L_DESC);
  for (genvar v = 0; v < V; v++) begin : g_slice
    assign ld_mask[v] = clear_q ? '0 : dr_mask[v*R +: R];
    assign ld_off[v]  = clear_q ? '0 : off_c[v];
  end

  assign rr_en    = (st == L_ROWS) && (issued < total);
  assign rr_row   = base + RAW'(issued / XW'(G));
  assign ld_valid = pend;
  assign ld_idx   = pend_idx;
  assign ld_cnt   = (total - pend_idx > XW'(G)) ? GW'(G) : GW'(total - pend_idx);
  assign ld_data  = rr_data;
  assign busy     = (st != L_IDLE) || pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= L_IDLE;
      clear_q  <= 1'b0;
      total    <= '0;
      issued   <= '0;
      base     <= '0;
      pend     <= 1'b0;
      pend_idx <= '0;
    end else begin
      pend     <= rr_en;
      pend_idx <= issued;
      case (st)
        L_IDLE: if (go) begin
          clear_q <= clear;
          st      <= L_DESC;
        end
        L_DESC: begin
          total  <= clear_q ? '0 : total_c;
          base   <= dr_base;
          issued <= '0;
          st     <= clear_q ? L_IDLE : L_ROWS;
        end
        L_ROWS: begin
          if (rr_en) issued <= issued + XW'(G);
          if (!rr_en) st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
