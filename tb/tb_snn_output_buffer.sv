// tb_snn_output_buffer: self-checking test of the output buffer.
// Writes 128 results four lanes at a time, as the accumulator drains them,
// then reads every output channel and checks the one-cycle read latency.
module tb_snn_output_buffer;
  import snn_pkg::*;
  localparam int NACC = 4, LBW = 128, ACC_W = 32, SEG = LBW / NACC;

  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] waddr = '0;
  logic [6:0] raddr = '0;
  logic signed [ACC_W-1:0] wdata [NACC];
  logic signed [ACC_W-1:0] rdata;
  int model [LBW];
  int checks = 0, failures = 0;

  snn_output_buffer #(.NACC(NACC), .LBW(LBW), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic read_all();
    for (int i = 0; i < LBW; i++) begin
      @(negedge clk); raddr = 7'(i);
      @(posedge clk); #1;
      checks++;
      if (int'(rdata) != model[i]) begin
        failures++; $display("FAIL channel %0d: %0d vs %0d", i, rdata, model[i]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < NACC; a++) wdata[a] = '0;
    for (int i = 0; i < LBW; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    read_all();
    for (int rep = 0; rep < 2; rep++) begin
      for (int k = 0; k < SEG; k++) begin
        @(negedge clk); we = 1; waddr = 5'(k);
        for (int a = 0; a < NACC; a++) begin
          wdata[a] = $signed($urandom);
          model[a*SEG+k] = int'(wdata[a]);
        end
      end
      @(negedge clk); we = 0;
      read_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
