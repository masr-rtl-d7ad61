// layer_ctrl: sequences one bidirectional (or unidirectional) RNN layer.
//
// The layer is run as in the paper: all time steps of the forward direction, then
// all time steps of the backward direction (bidirectional layers only). For time
// step t of direction d (t runs T-1 down to 0 backwards) it
//   1. loads the previous hidden state (t-1 forward, t+1 backward; all zeros at
//      the first step) into the PE register files and runs the W_h pass, which
//      overwrites the output register file,
//   2. captures the output-predication flags (hidden intermediate below threshold),
//   3. for each input vector of the step loads it and runs a W_x pass, which adds
//      to the output register file; columns flagged in 2 are skipped when output
//      predication is enabled (never at the first step),
//   4. runs VVAdd, which writes the new hidden state compactly into the
//      direction's output region, right after the previous step's state.
// Up to two input vectors per step are summed (`cfg_two_in`), so the next layer
// can take y^t = h^t + g^t of the layer below as the two vectors h^t and g^t
// without forming the sum: W_x y = W_x h + W_x g. This and the region scheme are
// this design's choices; the paper does not say where y^t is formed.
// Vector v of region r is descriptor r*TMAX + v; the values of region r are written
// from activation SRAM row cfg_reg_base[r] on, one vector after the other, so the
// host can size the regions to the sparsity of what they hold. Each sub-unit is started with a one-cycle `go` and
// reports `busy`, which it raises on the next edge.
module layer_ctrl
  import masr_pkg::*;
#(
  parameter int unsigned TMAX  = 333,
  parameter int unsigned NREG  = 4,
  parameter int unsigned ROWS  = 61440,
  localparam int unsigned TW   = $clog2(TMAX + 1),
  localparam int unsigned RGW  = (NREG > 1) ? $clog2(NREG) : 1,
  localparam int unsigned RAW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned VW   = $clog2(NREG * TMAX)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // run-time configuration (held during a run)
  input  logic [TW-1:0]   cfg_t,        // time steps, 1..TMAX
  input  logic            cfg_bidir,
  input  logic            cfg_two_in,   // two input vectors per step
  input  logic [RGW-1:0]  cfg_in_reg0,
  input  logic [RGW-1:0]  cfg_in_reg1,
  input  logic [RGW-1:0]  cfg_out_reg_f,
  input  logic [RGW-1:0]  cfg_out_reg_b,
  input  logic            cfg_op_en,
  input  logic [NREG-1:0][RAW-1:0] cfg_reg_base,  // first activation row of each region
  // activation loader
  output logic            ld_go,
  output logic            ld_clear,
  output logic [VW-1:0]   ld_vec,
  input  logic            ld_busy,
  // lanes and partial-sum accumulators
  output logic            pass_start,
  output logic            pass_mat,
  output logic            dir,
  output logic            skip_en,
  output out_mode_e       acc_mode,
  input  logic            pass_busy,
  output logic            op_capture,
  // VVAdd
  output logic            vv_go,
  output logic [RAW-1:0]  vv_row_start,
  output logic [VW-1:0]   vv_vec,
  input  logic            vv_busy,
  input  logic [RAW-1:0]  vv_rows,
  // status
  output ctrl_state_e     state,
  output logic [TW-1:0]   step
);
  logic           launched;
  logic           part;
  logic [RAW-1:0] wptr;
  logic [TW-1:0]  t, tprev;
  logic [RGW-1:0] out_reg, in_reg, ld_reg;
  logic           sub_busy;

  assign t       = dir ? (cfg_t - TW'(1) - step) : step;
  assign tprev   = dir ? (t + TW'(1)) : (t - TW'(1));
  assign out_reg = dir ? cfg_out_reg_b : cfg_out_reg_f;
  assign in_reg  = part ? cfg_in_reg1 : cfg_in_reg0;

  assign ld_reg     = (state == C_LOAD_H) ? out_reg : in_reg;
  assign ld_go      = !launched && (state == C_LOAD_H || state == C_LOAD_X);
  assign ld_clear   = (state == C_LOAD_H) && (step == '0);
  assign ld_vec     = VW'(int'(ld_reg) * TMAX) +
                      VW'((state == C_LOAD_H) ? tprev : t);
  assign pass_start = !launched && (state == C_RUN_H || state == C_RUN_X);
  assign pass_mat   = (state == C_RUN_X);
  assign acc_mode   = (state == C_RUN_X) ? OUT_ADD : OUT_WRITE;
  assign skip_en    = cfg_op_en && (state == C_RUN_X) && (step != '0);
  assign vv_go      = !launched && (state == C_VVADD);
  assign vv_row_start = wptr;
  assign vv_vec     = VW'(out_reg * TMAX) + VW'(t);
  assign op_capture = launched && !pass_busy && (state == C_RUN_H);
  assign busy       = (state != C_IDLE) && (state != C_DONE);

  always_comb begin
    case (state)
      C_LOAD_H, C_LOAD_X: sub_busy = ld_busy;
      C_RUN_H, C_RUN_X:   sub_busy = pass_busy;
      C_VVADD:            sub_busy = vv_busy;
      default:            sub_busy = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      launched <= 1'b0;
      dir      <= 1'b0;
      step     <= '0;
      part     <= 1'b0;
      wptr     <= '0;
      done     <= 1'b0;
    end else begin
      case (state)
        C_IDLE, C_DONE: if (start) begin
          state    <= C_LOAD_H;
          launched <= 1'b0;
          dir      <= 1'b0;
          step     <= '0;
          part     <= 1'b0;
          wptr     <= cfg_reg_base[cfg_out_reg_f];
          done     <= 1'b0;
        end
        C_NEXT: begin
          if (step + TW'(1) == cfg_t) begin
            step <= '0;
            if (cfg_bidir && !dir) begin
              dir   <= 1'b1;
              wptr  <= cfg_reg_base[cfg_out_reg_b];
              state <= C_LOAD_H;
            end else begin
              state <= C_DONE;
              done  <= 1'b1;
            end
          end else begin
            step  <= step + TW'(1);
            state <= C_LOAD_H;
          end
        end
        default: begin
          if (!launched) begin
            launched <= 1'b1;
          end else if (!sub_busy) begin
            launched <= 1'b0;
            case (state)
              C_LOAD_H: state <= C_RUN_H;
              C_RUN_H: begin
                part  <= 1'b0;
                state <= C_LOAD_X;
              end
              C_LOAD_X: state <= C_RUN_X;
              C_RUN_X: begin
                if (cfg_two_in && !part) begin
                  part  <= 1'b1;
                  state <= C_LOAD_X;
                end else begin
                  state <= C_VVADD;
                end
              end
              C_VVADD: begin
                wptr  <= wptr + vv_rows;
                state <= C_NEXT;
              end
              default: state <= C_IDLE;
            endcase
          end
        end
      endcase
    end
  end
endmodule
