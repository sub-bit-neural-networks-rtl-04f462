// snn_pkg: constants and types shared by the sub-bit network accelerator.
//
// A sub-bit network layer stores every 3x3 binary kernel as a TAU-bit
// index into a per-layer subset of 2**TAU binary kernels. The accelerator
// convolves the current 3x3 activation slice with each of the 2**TAU
// kernels once (pre-computing stage), keeps the results in a small lookup
// table, and then turns every weight of the layer into a table lookup plus
// an addition (accumulator stage).
//
// Numbers that follow the paper: TAU = 5 (the 0.56-bit model, 32 kernels),
// 9 weights per kernel, 64 PEs, 4 parallel accumulators, a 128-wide line
// buffer. The activation and accumulator widths are this design's choice:
// the paper evaluates non-binarized activations but gives no number format,
// so activations are signed fixed-point integers.
package snn_pkg;

  // Kernel geometry: 3x3 kernels, flattened row-major (9 weights).
  localparam int unsigned KSIZE  = 9;

  // Default configuration of the 0.56-bit model.
  localparam int unsigned TAU_DEF     = 5;    // bits per kernel index
  localparam int unsigned NPE_DEF     = 64;   // processing engines
  localparam int unsigned NACC_DEF    = 4;    // parallel accumulators per PE
  localparam int unsigned LBW_DEF     = 128;  // line-buffer width (output channels per round)
  localparam int unsigned ACT_W_DEF   = 16;   // activation width (signed)
  localparam int unsigned ACC_W_DEF   = 32;   // partial-sum width (signed)
  localparam int unsigned MAX_CIN_DEF = 512;  // most input channels per round

  // One binary kernel: bit 8 is the top-left weight, bit 0 the bottom-right;
  // a set bit means +1 and a clear bit -1. Read as an unsigned number this
  // is the kernel's index in the full 512-kernel set (all -1 = 0, all +1 = 511).
  typedef logic [KSIZE-1:0] bkernel_t;

  // Integer ceiling log2 that never returns 0 (for address widths).
  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
