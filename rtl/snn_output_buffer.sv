// snn_output_buffer: the output buffer of one PE.
//
// When the last input channel of a round has been accumulated, the LBW
// finished output-channel sums of the PE's output pixel arrive here, NACC
// per cycle (lane a writes output channel a*SEG + waddr). They stay until
// the next round overwrites them, and are read one output channel at a time.
//
// Interface: write port (we, waddr, wdata[NACC]) from the accumulator;
// read port raddr (output channel, 0 .. LBW-1) -> rdata.
// Timing: writes at the rising edge; the read data is registered, so rdata
// belongs to the raddr of the previous cycle. Reset clears the buffer.
// The paper says only that line-buffer data is stored into a dedicated
// output buffer; depth, ports and the registered read are this design's
// choice.
module snn_output_buffer
  import snn_pkg::*;
#(
  parameter int unsigned NACC  = NACC_DEF,
  parameter int unsigned LBW   = LBW_DEF,
  parameter int unsigned ACC_W = ACC_W_DEF,
  localparam int unsigned SEG  = LBW / NACC,
  localparam int unsigned AW   = clog2_min1(SEG),
  localparam int unsigned RAW  = clog2_min1(LBW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic signed [ACC_W-1:0]  wdata [NACC],
  input  logic [RAW-1:0]           raddr,
  output logic signed [ACC_W-1:0]  rdata
);

  logic signed [ACC_W-1:0] mem [LBW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LBW; i++) mem[i] <= '0;
      rdata <= '0;
    end else begin
      if (we) begin
        for (int a = 0; a < NACC; a++) mem[a*SEG + int'(waddr)] <= wdata[a];
      end
      rdata <= mem[raddr];
    end
  end

endmodule
