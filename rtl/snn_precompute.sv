// snn_precompute: the pre-computing stage of one PE.
//
// In each active cycle it convolves the PE's current 3x3 activation slice
// with the binary kernel that the subset memory supplies for kernel ID kidx,
// and writes the result straight into the LUT bank being filled, at address
// kidx. Stepping kidx over 0 .. 2**TAU-1 fills a bank in 2**TAU cycles
// (32 for the 0.56-bit model), as in the paper.
//
// Interface: en marks an active cycle; kidx, bank come from the controller;
// kernel is the subset-memory word for kidx; slice is the PE's activations.
// The outputs are the LUT write port.
// Timing: combinational from inputs to the LUT write port; the result is
// stored at the end of the same cycle.
module snn_precompute
  import snn_pkg::*;
#(
  parameter int unsigned TAU   = TAU_DEF,
  parameter int unsigned ACT_W = ACT_W_DEF
) (
  input  logic                     en,
  input  logic [TAU-1:0]           kidx,
  input  logic                     bank,
  input  bkernel_t                 kernel,
  input  logic signed [ACT_W-1:0]  slice [KSIZE],
  output logic                     lut_we,
  output logic                     lut_wbank,
  output logic [TAU-1:0]           lut_waddr,
  output logic signed [ACT_W+3:0]  lut_wdata
);

  snn_dot9 #(.ACT_W(ACT_W)) u_dot9 (
    .act    (slice),
    .kernel (kernel),
    .dot    (lut_wdata)
  );

  assign lut_we    = en;
  assign lut_wbank = bank;
  assign lut_waddr = kidx;

endmodule
