// hsa_pkg: constants and types shared by the hybrid systolic array (HSA)
// accelerator. The array is 16x16 processing elements (PEs) built as four PE
// clusters (PCs) of 4 rows each, as in the paper; 8-bit activations, 8-bit
// (MMM) or MXINT4 (MVM) weights with a 4-bit shift scale Sw. Accumulator and
// fixed-point widths are this design's own choices.
package hsa_pkg;
  localparam int unsigned N_PC      = 4;    // PE clusters (paper)
  localparam int unsigned PC_ROWS   = 4;    // PE rows per cluster (paper)
  localparam int unsigned COLS      = 16;   // PEs per row (paper)
  localparam int unsigned ROWS      = N_PC * PC_ROWS;  // 16
  localparam int unsigned ACT_W     = 8;    // INT8 activations (paper)
  localparam int unsigned WGT_W     = 8;    // INT8 / dequantised weights (paper)
  localparam int unsigned MX_W      = 4;    // MXINT4 element (paper)
  localparam int unsigned SW_W      = 4;    // shift scale Sw (paper)
  localparam int unsigned ACC_W     = 32;   // PE accumulator (assumed)
  localparam int unsigned MVM_W     = ACC_W + 12; // after sum 2^(4i) Psum_i
  localparam int unsigned SCALE_W   = 32;   // requant scale, unsigned Q8.24 (assumed)
  localparam int unsigned SCALE_FRAC= 24;
  localparam int unsigned WORD_W    = COLS * WGT_W;  // 128-bit SRAM word

  typedef enum logic {MODE_MMM = 1'b0, MODE_MVM = 1'b1} mode_e;
  typedef enum logic {DRAIN_H = 1'b0, DRAIN_V = 1'b1} drain_e;
  typedef enum logic {ROPE_EMBED = 1'b0, ROPE_UPDATE = 1'b1} rope_mode_e;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [MVM_W-1:0] mvm_t;
endpackage
