// snn_pe: one processing engine (PE) of the sub-bit network accelerator.
//
// A PE computes LBW output channels of one output pixel. It is two pipeline
// stages joined by a double-buffered LUT:
//   pre-computing stage: for the current input channel, convolve the PE's
//     3x3 activation slice with each of the 2**TAU subset kernels, one per
//     cycle, and store the results in one LUT bank;
//   accumulator stage: for the previous input channel, turn NACC kernel IDs
//     per cycle into LUT lookups and add them to the line buffer partial
//     sums; after the last input channel, move the sums to the output buffer
//     and clear the line buffer.
// Both stages run in the same cycles on different LUT banks.
//
// Interface: the controller's stage signals and the shared subset-memory
// kernel come in from outside, because all PEs of the array run in lock
// step and see the same kernels and kernel IDs; only the activation slice
// and the output buffer are per PE. ob_raddr/ob_rdata read the output buffer
// (registered, one cycle).
// Structure, double buffer, 4 accumulators and 128-wide line buffer follow
// the paper; widths are this design's choice.
module snn_pe
  import snn_pkg::*;
#(
  parameter int unsigned TAU   = TAU_DEF,
  parameter int unsigned NACC  = NACC_DEF,
  parameter int unsigned LBW   = LBW_DEF,
  parameter int unsigned ACT_W = ACT_W_DEF,
  parameter int unsigned ACC_W = ACC_W_DEF,
  localparam int unsigned SEG  = LBW / NACC,
  localparam int unsigned AW   = clog2_min1(SEG),
  localparam int unsigned RAW  = clog2_min1(LBW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // pre-computing stage
  input  logic                     pc_en,
  input  logic [TAU-1:0]           pc_kidx,
  input  logic                     pc_bank,
  input  bkernel_t                 kernel,
  input  logic signed [ACT_W-1:0]  slice [KSIZE],
  // accumulator stage
  input  logic                     acc_en,
  input  logic [AW-1:0]            acc_addr,
  input  logic                     acc_bank,
  input  logic                     acc_last,
  input  logic [TAU-1:0]           ids [NACC],
  // output buffer read
  input  logic [RAW-1:0]           ob_raddr,
  output logic signed [ACC_W-1:0]  ob_rdata
);

  localparam int unsigned DW = ACT_W + 4;

  logic                     lut_we, lut_wbank;
  logic [TAU-1:0]           lut_waddr;
  logic signed [DW-1:0]     lut_wdata;
  logic [TAU-1:0]           lut_raddr [NACC];
  logic signed [DW-1:0]     lut_rdata [NACC];
  logic signed [ACC_W-1:0]  lb_rdata  [NACC];
  logic signed [ACC_W-1:0]  lb_wdata  [NACC];
  logic signed [ACC_W-1:0]  ob_wdata  [NACC];
  logic                     lb_we, ob_we;

  snn_precompute #(.TAU(TAU), .ACT_W(ACT_W)) u_precompute (
    .en        (pc_en),
    .kidx      (pc_kidx),
    .bank      (pc_bank),
    .kernel    (kernel),
    .slice     (slice),
    .lut_we    (lut_we),
    .lut_wbank (lut_wbank),
    .lut_waddr (lut_waddr),
    .lut_wdata (lut_wdata)
  );

  snn_lut #(.TAU(TAU), .DW(DW), .NRD(NACC)) u_lut (
    .clk   (clk),
    .we    (lut_we),
    .wbank (lut_wbank),
    .waddr (lut_waddr),
    .wdata (lut_wdata),
    .rbank (acc_bank),
    .raddr (lut_raddr),
    .rdata (lut_rdata)
  );

  snn_accumulator #(.TAU(TAU), .NACC(NACC), .DW(DW), .ACC_W(ACC_W)) u_acc (
    .en        (acc_en),
    .last      (acc_last),
    .ids       (ids),
    .lut_raddr (lut_raddr),
    .lut_rdata (lut_rdata),
    .lb_rdata  (lb_rdata),
    .lb_we     (lb_we),
    .lb_wdata  (lb_wdata),
    .ob_we     (ob_we),
    .ob_wdata  (ob_wdata)
  );

  snn_line_buffer #(.NACC(NACC), .LBW(LBW), .ACC_W(ACC_W)) u_lb (
    .clk   (clk),
    .rst_n (rst_n),
    .addr  (acc_addr),
    .rdata (lb_rdata),
    .we    (lb_we),
    .wdata (lb_wdata)
  );

  snn_output_buffer #(.NACC(NACC), .LBW(LBW), .ACC_W(ACC_W)) u_ob (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (ob_we),
    .waddr (acc_addr),
    .wdata (ob_wdata),
    .raddr (ob_raddr),
    .rdata (ob_rdata)
  );

endmodule
