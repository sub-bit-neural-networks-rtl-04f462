// snn_subset_mem: storage of one layer's kernel subset.
//
// A sub-bit layer uses only 2**TAU distinct 3x3 binary kernels (32 for the
// 0.56-bit model). They are stored here, 9 bits each, and read by kernel ID
// (0 .. 2**TAU-1). The pre-computing stage walks the IDs in order, one per
// cycle, and all PEs share the one kernel that is read.
//
// Interface: a write port (we, waddr, wdata) to load the layer's subset
// before a layer starts, and one asynchronous read port (raddr -> rdata).
// Timing: writes take effect on the next rising clock edge; reads are
// combinational. Reset clears every entry to the all -1 kernel (zero bits).
// The subset size and the 9-bit kernel format follow the paper; the port
// arrangement and reset value are this design's choice.
module snn_subset_mem
  import snn_pkg::*;
#(
  parameter int unsigned TAU = TAU_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [TAU-1:0]  waddr,
  input  bkernel_t        wdata,
  input  logic [TAU-1:0]  raddr,
  output bkernel_t        rdata
);

  localparam int unsigned DEPTH = 1 << TAU;

  bkernel_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];

endmodule
