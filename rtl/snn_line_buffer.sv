// snn_line_buffer: the line buffer (LB) of one PE.
//
// It holds one partial sum per output channel of the current round, LBW
// entries (128 in the paper's configuration), split into NACC segments of
// SEG = LBW/NACC entries. Lane a of the accumulator owns segment a; all
// lanes address the same position inside their segments, so entry
// a*SEG + addr is lane a's.
//
// Interface: addr selects the position in every segment; rdata[a] is the
// entry of lane a (asynchronous read); when we is high, wdata[a] is written
// to the same entry on the next rising edge.
// Timing: read combinationally, written at the clock edge, so a
// read-add-write completes in one cycle. Reset clears every entry, the
// state the accumulation of a new round starts from.
// The width and the 4 x 32 segmentation follow the paper's figure; the
// port arrangement is this design's choice.
module snn_line_buffer
  import snn_pkg::*;
#(
  parameter int unsigned NACC  = NACC_DEF,
  parameter int unsigned LBW   = LBW_DEF,
  parameter int unsigned ACC_W = ACC_W_DEF,
  localparam int unsigned SEG  = LBW / NACC,
  localparam int unsigned AW   = clog2_min1(SEG)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [AW-1:0]            addr,
  output logic signed [ACC_W-1:0]  rdata [NACC],
  input  logic                     we,
  input  logic signed [ACC_W-1:0]  wdata [NACC]
);

  logic signed [ACC_W-1:0] mem [NACC][SEG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NACC; a++)
        for (int i = 0; i < SEG; i++) mem[a][i] <= '0;
    end else if (we) begin
      for (int a = 0; a < NACC; a++) mem[a][addr] <= wdata[a];
    end
  end

  always_comb begin
    for (int a = 0; a < NACC; a++) rdata[a] = mem[a][addr];
  end

endmodule
