// snn_slice_buffer: activation strip buffer and 3x3 slice extraction.
//
// The PEs work on NPE horizontally adjacent output pixels of one output row,
// with stride 1. For one input channel they need a strip of 3 input rows by
// NPE+2 columns; PE p takes the overlapped 3x3 slice whose left column is p.
// So every input channel of a round needs one strip.
//
// The buffer has two registers: 'cur', the strip the PEs use during the
// current pre-computing phase, and 'next', a prefetched strip. A strip is
// accepted (s_valid && s_ready) whenever 'next' is empty. When the
// controller starts a new pre-computing phase (take), 'next' moves into
// 'cur'; in that same cycle the slices are already taken from 'next', so the
// first kernel of the phase sees the new channel.
//
// Interface: valid/ready strip input s_data[row][col]; avail tells the
// controller a strip is waiting; slice[p][i] is element i (row-major) of
// PE p's slice.
// Timing: one strip may be accepted per cycle while 'next' is empty.
// The overlapped-slice split follows the paper; the strip format, the
// prefetch register and the handshake are this design's choice (the paper
// leaves the supply of activations to the PEs open).
module snn_slice_buffer
  import snn_pkg::*;
#(
  parameter int unsigned NPE   = NPE_DEF,
  parameter int unsigned ACT_W = ACT_W_DEF,
  localparam int unsigned NCOL = NPE + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic signed [ACT_W-1:0]  s_data [3][NCOL],
  output logic                     avail,
  input  logic                     take,
  output logic signed [ACT_W-1:0]  slice [NPE][KSIZE]
);

  logic signed [ACT_W-1:0] cur_q  [3][NCOL];
  logic signed [ACT_W-1:0] next_q [3][NCOL];
  logic                    next_full;

  assign s_ready = !next_full;
  assign avail   = next_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_full <= 1'b0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < NCOL; c++) begin
          cur_q[r][c]  <= '0;
          next_q[r][c] <= '0;
        end
    end else begin
      if (take && next_full) begin
        cur_q     <= next_q;
        next_full <= 1'b0;
      end else if (s_valid && !next_full) begin
        next_q    <= s_data;
        next_full <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NPE; p++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          slice[p][3*r+c] = take ? next_q[r][p+c] : cur_q[r][p+c];
  end

endmodule
