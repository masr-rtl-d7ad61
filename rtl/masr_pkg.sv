// masr_pkg: number formats and shared types of the MASR sparse RNN accelerator.
//
// Weights and activations are 10-bit two's complement values (10-bit weights and
// activations follow the paper's Table 3). Products are accumulated in 32-bit
// accumulators, kept separately for positive and negative weights because the two
// signs are quantised with separate scale factors; the two sums are combined only
// in the partial-sum accumulator. The 60-bit compact activation SRAM word holding
// six activations also follows the paper. Accumulator width, the scale-factor
// format, bias width and the controller encoding are this design's own choices.
package masr_pkg;

  localparam int unsigned WW            = 10;  // weight width (paper)
  localparam int unsigned AW            = 10;  // activation width (paper)
  localparam int unsigned ACCW          = 32;  // lane accumulator width
  localparam int unsigned OUTW          = 32;  // output register file entry width
  localparam int unsigned BIASW         = 16;  // bias width
  localparam int unsigned SCALEW        = 10;  // per-sign weight scale factor width
  localparam int unsigned SCALE_SHIFT   = 8;   // scale factors are unsigned Q2.8
  localparam int unsigned VALS_PER_WORD = 6;   // activations per SRAM word (paper)
  localparam int unsigned ACT_WORD_W    = VALS_PER_WORD * AW;  // 60 bits (paper)

  // Partial sum of one output column from one lane: separate positive-weight and
  // negative-weight accumulators.
  typedef struct packed {
    logic signed [ACCW-1:0] pos;
    logic signed [ACCW-1:0] neg;
  } psum_t;

  // Output register file write mode: the W_h pass overwrites, W_x passes add.
  typedef enum logic {
    OUT_WRITE = 1'b0,
    OUT_ADD   = 1'b1
  } out_mode_e;

  typedef enum logic [3:0] {
    C_IDLE,
    C_LOAD_H,
    C_RUN_H,
    C_LOAD_X,
    C_RUN_X,
    C_VVADD,
    C_NEXT,
    C_DONE
  } ctrl_state_e;

  // Combine the vertical sums of the two accumulators with their scale factors.
  function automatic logic signed [OUTW-1:0] scale_psum(
      input logic signed [ACCW+7:0] sum_pos,
      input logic signed [ACCW+7:0] sum_neg,
      input logic [SCALEW-1:0] scale_pos,
      input logic [SCALEW-1:0] scale_neg);
    logic signed [ACCW+SCALEW+9:0] t;
    t = sum_pos * $signed({1'b0, scale_pos}) + sum_neg * $signed({1'b0, scale_neg});
    return OUTW'(t >>> SCALE_SHIFT);
  endfunction

endpackage
