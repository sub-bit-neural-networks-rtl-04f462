// snn_dot9: dot product of one 3x3 activation slice with one binary kernel.
//
// Every kernel weight is +1 or -1, so no multiplier is needed: each of the
// nine activations is passed through or negated by its kernel bit, and the
// nine signed terms are summed by a balanced adder tree (4 + 2 + 1 + 1
// adders). The result is exact: it is ACT_W+4 bits wide, enough for nine
// ACT_W-bit terms.
//
// Interface: act[i] is the slice element at row i/3, column i%3 (row-major);
// kernel[8-i] is the matching weight bit (1 = +1, 0 = -1), so the kernel's
// top-left weight is its most significant bit, as in the index convention
// of the sub-bit network paper.
// Timing: purely combinational. The paper names this unit ("Dot9") and
// draws it as a tree of adders; the negate-and-add structure is this
// design's reading of that drawing.
module snn_dot9
  import snn_pkg::*;
#(
  parameter int unsigned ACT_W = ACT_W_DEF
) (
  input  logic signed [ACT_W-1:0]   act [KSIZE],
  input  bkernel_t                  kernel,
  output logic signed [ACT_W+3:0]   dot
);

  localparam int unsigned SW = ACT_W + 4;

  logic signed [SW-1:0] term [KSIZE];
  logic signed [SW-1:0] l1 [4];
  logic signed [SW-1:0] l2 [2];
  logic signed [SW-1:0] l3;

  always_comb begin
    for (int i = 0; i < KSIZE; i++) begin
      term[i] = kernel[KSIZE-1-i] ? SW'(act[i]) : -SW'(act[i]);
    end
    for (int i = 0; i < 4; i++) l1[i] = term[2*i] + term[2*i+1];
    for (int i = 0; i < 2; i++) l2[i] = l1[2*i] + l1[2*i+1];
    l3  = l2[0] + l2[1];
    dot = l3 + term[8];
  end

endmodule
