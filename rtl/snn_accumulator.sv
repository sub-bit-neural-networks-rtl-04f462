// snn_accumulator: the accumulator stage of one PE (NACC parallel lanes).
//
// A weight of a sub-bit layer is a kernel ID. Lane a takes the kernel ID of
// output channel a*SEG + k (SEG = LBW/NACC, k = position in the lane's line
// buffer segment), looks it up in the LUT bank filled for the previous input
// channel, and adds the looked-up dot product to that output channel's
// partial sum from the line buffer. The sum is written back to the same line
// buffer place. On the last input channel (last = 1) the finished sum goes to
// the output buffer instead and the line buffer place is cleared to zero for
// the next round. With 4 lanes and a 128-wide line buffer one input channel
// takes 32 cycles, matching the pre-computing stage.
//
// Interface: en marks an active cycle; ids are the NACC kernel IDs of this
// cycle; lut_raddr/lut_rdata is the LUT lookup; lb_rdata/lb_we/lb_wdata is
// the read-modify-write of the line buffer; ob_we/ob_wdata feeds the output
// buffer.
// Timing: combinational; the line buffer and output buffer store on the next
// rising edge, so one read-modify-write per lane completes every cycle.
// Lane count, lookup-then-add and the drain to an output buffer follow the
// paper; doing the drain in the last accumulation cycle (instead of in extra
// cycles) is this design's choice.
module snn_accumulator
  import snn_pkg::*;
#(
  parameter int unsigned TAU   = TAU_DEF,
  parameter int unsigned NACC  = NACC_DEF,
  parameter int unsigned DW    = ACT_W_DEF + 4,
  parameter int unsigned ACC_W = ACC_W_DEF
) (
  input  logic                     en,
  input  logic                     last,
  input  logic [TAU-1:0]           ids       [NACC],
  output logic [TAU-1:0]           lut_raddr [NACC],
  input  logic signed [DW-1:0]     lut_rdata [NACC],
  input  logic signed [ACC_W-1:0]  lb_rdata  [NACC],
  output logic                     lb_we,
  output logic signed [ACC_W-1:0]  lb_wdata  [NACC],
  output logic                     ob_we,
  output logic signed [ACC_W-1:0]  ob_wdata  [NACC]
);

  logic signed [ACC_W-1:0] sum [NACC];

  always_comb begin
    for (int a = 0; a < NACC; a++) begin
      lut_raddr[a] = ids[a];
      sum[a]       = lb_rdata[a] + ACC_W'(lut_rdata[a]);
      lb_wdata[a]  = last ? '0 : sum[a];
      ob_wdata[a]  = sum[a];
    end
    lb_we = en;
    ob_we = en && last;
  end

endmodule
