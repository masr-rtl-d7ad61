// vvadd_unit: finishes a time step.
//
// Reads G entries of the output register file per cycle (G = 6 per activation SRAM
// bank), adds the biases of the current direction, applies ReLU, requantises to
// the 10-bit activation format (arithmetic right shift by `out_shift`, saturating)
// and writes the result compactly: a mask bit per neuron, and the non-zeros packed
// in order into rows of G activations written from row `row_start` on. At the end
// it writes the vector's descriptor (mask and start row) and reports how many rows
// it used. A vector of N neurons takes ceil(N/G) cycles plus at most two: the
// VVAdd rate is bound by the activation SRAM width, as the paper observes (six
// additions per cycle with one bank). Biases are held in a local table, one per
// neuron and direction, written by the host. Bias table, requantisation and
// packing order are this design's choices.
module vvadd_unit
  import masr_pkg::*;
#(
  parameter int unsigned N    = 800,
  parameter int unsigned B    = 1,
  parameter int unsigned ROWS = 61440,
  localparam int unsigned G   = VALS_PER_WORD * B,
  localparam int unsigned NW  = $clog2(N),
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned GW  = $clog2(2 * G + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   go,
  input  logic                   dir,
  input  logic [4:0]             out_shift,
  input  logic [RAW-1:0]         row_start,
  output logic                   busy,
  output logic [RAW-1:0]         rows_used,
  // bias table load
  input  logic                   b_we,
  input  logic                   b_dir,
  input  logic [NW-1:0]          b_idx,
  input  logic signed [BIASW-1:0] b_data,
  // output register file read window
  output logic [NW-1:0]          rd_base,
  input  logic [G-1:0][OUTW-1:0] rd_data,
  // compact writes
  output logic                   rw_en,
  output logic [RAW-1:0]         rw_row,
  output logic [G-1:0][AW-1:0]   rw_data,
  output logic                   dw_en,
  output logic [N-1:0]           dw_mask,
  output logic [RAW-1:0]         dw_base
);
  typedef enum logic [1:0] {V_IDLE, V_RUN, V_FLUSH, V_DESC} vstate_e;
  localparam logic signed [OUTW-1:0] AMAX = OUTW'((1 << (AW - 1)) - 1);

  logic signed [BIASW-1:0] bias [2][N];
  vstate_e          st;
  logic             dir_q;
  logic [NW:0]      gbase;
  logic [RAW-1:0]   row, start_q;
  logic [AW-1:0]    buffer [2*G];
  logic [GW-1:0]    fill;
  logic [N-1:0]     mask;

  logic [G-1:0]          nz;
  logic [G-1:0][AW-1:0]  val;
  logic [AW-1:0]         nb [2*G];
  logic [GW-1:0]         nfill;

  always_ff @(posedge clk) begin
    if (b_we) bias[b_dir][b_idx] <= b_data;
  end

  assign rd_base = NW'(gbase);

  // bias add, ReLU, requantise
  always_comb begin
    for (int j = 0; j < G; j++) begin
      logic signed [OUTW:0] s;
      logic signed [OUTW:0] q;
      s = '0;
      if (int'(gbase) + j < N)
        s = (OUTW+1)'($signed(rd_data[j])) + (OUTW+1)'(bias[dir_q][int'(gbase) + j]);
      q = s >>> out_shift;
      if (s <= 0)          val[j] = '0;
      else if (q > (OUTW+1)'(AMAX)) val[j] = AW'(AMAX);
      else                 val[j] = AW'(q);
      nz[j] = (val[j] != '0);
    end
  end

  // append this group's non-zeros to the packing buffer
  always_comb begin
    logic [GW-1:0] pos;
    for (int i = 0; i < 2*G; i++) nb[i] = (GW'(i) < fill) ? buffer[i] : '0;
    pos = fill;
    for (int j = 0; j < G; j++) begin
      if (nz[j]) begin
        nb[pos] = val[j];
        pos = pos + GW'(1);
      end
    end
    nfill = pos;
  end

  assign busy      = (st != V_IDLE);
  assign rows_used = row - start_q;
  assign dw_en     = (st == V_DESC);
  assign dw_mask   = mask;
  assign dw_base   = start_q;
  assign rw_row    = row;

  always_comb begin
    rw_en = 1'b0;
    for (int j = 0; j < G; j++) rw_data[j] = nb[j];
    if (st == V_RUN && nfill >= GW'(G)) rw_en = 1'b1;
    if (st == V_FLUSH && fill != '0) begin
      rw_en = 1'b1;
      for (int j = 0; j < G; j++) rw_data[j] = (GW'(j) < fill) ? buffer[j] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= V_IDLE;
      dir_q   <= 1'b0;
      gbase   <= '0;
      row     <= '0;
      start_q <= '0;
      fill    <= '0;
      mask    <= '0;
    end else begin
      case (st)
        V_IDLE: if (go) begin
          st      <= V_RUN;
          dir_q   <= dir;
          gbase   <= '0;
          row     <= row_start;
          start_q <= row_start;
          fill    <= '0;
          mask    <= '0;
        end
        V_RUN: begin
          for (int j = 0; j < G; j++)
            if (int'(gbase) + j < N) mask[int'(gbase) + j] <= nz[j];
          if (nfill >= GW'(G)) begin
            for (int i = 0; i < G; i++) buffer[i] <= nb[i + G];
            fill <= nfill - GW'(G);
            row  <= row + RAW'(1);
          end else begin
            for (int i = 0; i < G; i++) buffer[i] <= nb[i];
            fill <= nfill;
          end
          gbase <= gbase + (NW+1)'(G);
          if (int'(gbase) + G >= N) st <= V_FLUSH;
        end
        V_FLUSH: begin
          if (fill != '0) row <= row + RAW'(1);
          fill <= '0;
          st   <= V_DESC;
        end
        V_DESC: st <= V_IDLE;
        default: st <= V_IDLE;
      endcase
    end
  end
endmodule
