// sc_pkg: constants and types shared by the thermometer-coded stochastic
// computing (SC) non-linear adder.
//
// Bit-vector convention used everywhere: a thermometer stream of length L is
// held in logic [L-1:0]; bit L-1 is the first stream position, and the 1s fill
// from the top, so the value-(-1) 4-bit code "1000" is 4'b1000. A stream with
// k ones represents x_q = k - L/2. Sorted (BSN) outputs therefore have their 1s
// at the high indices.
//
// Sizes that the figures print (576-bit BSN input, 72-bit partial sums, 8
// partial passes plus a final pass, 256-bit final output, 16-bit activation)
// are the defaults. The two-stage split of the approximate BSN (9 sub-BSNs of
// 64 bits, stride 2) and all encodings below are this design's own choices.
package sc_pkg;

  // Activation / residual BSL (16b BSL, values -8..8).
  localparam int unsigned ACT_BSL   = 16;
  // Ternary operand BSL (values -1, 0, 1).
  localparam int unsigned TERN_BSL  = 2;
  // BSN input width per cycle and the widths of its two outputs.
  localparam int unsigned BSN_IN_W  = 576;
  localparam int unsigned PSUM_W    = 72;
  localparam int unsigned FINAL_W   = 256;
  // Number of partial-sum slots in the buffer (8 x 72b = 576b).
  localparam int unsigned PSUM_SLOTS = 8;

  // Run-time clip/stride of the last sub-sampling stage of the approximate BSN.
  // clip: bits removed from each end of the sorted stream; stride: keep 1 of s.
  typedef struct packed {
    logic [8:0] clip;
    logic [3:0] stride;
  } ss_cfg_t;

  // Residual re-scaling direction.
  typedef enum logic [1:0] {
    RES_PASS = 2'd0,  // copy the residual unchanged
    RES_MUL  = 2'd1,  // multiply by 2^N (replicate 2^N times)
    RES_DIV  = 2'd2   // divide by 2^N (N halving cycles)
  } res_mode_e;

  // Residual stored in one buffer slot: at most 4 copies of 16 bits fit in 72.
  localparam int unsigned RES_MUL_MAX = 2;

  // Per-operation configuration of the non-linear adder, latched at start.
  typedef struct packed {
    logic [3:0] n_beats;    // product passes, 1..8 (1..7 with a residual)
    logic       res_en;     // add the re-scaled residual
    res_mode_e  res_mode;   // residual re-scaling direction
    logic [2:0] res_shift;  // residual re-scaling exponent N
    ss_cfg_t    ss_part;    // BSN stage-2 setting for partial passes (72b out)
    ss_cfg_t    ss_final;   // BSN stage-2 setting for the final pass (256b out)
  } nla_cfg_t;

endpackage
