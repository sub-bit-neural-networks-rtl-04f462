// snn_lut: double-buffered lookup table of pre-computed kernel results.
//
// For the current 3x3 activation slice, entry j holds the dot product of
// that slice with kernel j of the layer's subset, so the table has only
// 2**TAU entries per bank. Two banks let the pre-computing stage fill one
// bank for input channel c while the accumulator stage reads the other
// bank, filled for channel c-1.
//
// Interface: one write port (we, wbank, waddr, wdata) and NRD independent
// read ports that share a bank select (rbank) and each take their own kernel
// ID (raddr[r] -> rdata[r]). NRD equals the number of parallel accumulators.
// Timing: a write lands on the next rising edge; reads are combinational,
// so a lookup is done within the cycle that uses it. Nothing is reset:
// every entry is written before it is read.
// The double buffer and the 2**TAU depth follow the paper; the port count
// follows the four accumulators of its figure.
module snn_lut
  import snn_pkg::*;
#(
  parameter int unsigned TAU = TAU_DEF,
  parameter int unsigned DW  = ACT_W_DEF + 4,
  parameter int unsigned NRD = NACC_DEF
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic                 wbank,
  input  logic [TAU-1:0]       waddr,
  input  logic signed [DW-1:0] wdata,
  input  logic                 rbank,
  input  logic [TAU-1:0]       raddr [NRD],
  output logic signed [DW-1:0] rdata [NRD]
);

  localparam int unsigned DEPTH = 1 << TAU;

  logic signed [DW-1:0] mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) rdata[r] = mem[rbank][raddr[r]];
  end

endmodule
