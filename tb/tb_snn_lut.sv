// tb_snn_lut: self-checking test of the double-buffered LUT.
// Fills bank 0 and bank 1 with different random values, then performs random
// 4-port lookups in each bank while the other bank is being rewritten, and
// compares with a software copy of both banks.
module tb_snn_lut;
  import snn_pkg::*;
  localparam int TAU = 5, DW = 20, NRD = 4, N = 1 << TAU;

  logic clk = 0, we = 0, wbank = 0, rbank = 0;
  logic [TAU-1:0] waddr = '0;
  logic signed [DW-1:0] wdata = '0;
  logic [TAU-1:0] raddr [NRD];
  logic signed [DW-1:0] rdata [NRD];
  logic signed [DW-1:0] model [2][N];
  int checks = 0, failures = 0;

  snn_lut #(.TAU(TAU), .DW(DW), .NRD(NRD)) dut (.*);

  always #5 clk = ~clk;

  task automatic lookup_check(input logic b);
    rbank = b;
    for (int r = 0; r < NRD; r++) raddr[r] = TAU'($urandom);
    #1;
    for (int r = 0; r < NRD; r++) begin
      checks++;
      if (rdata[r] != model[b][raddr[r]]) begin
        failures++;
        $display("FAIL bank %0d port %0d addr %0d: %0d vs %0d", b, r, raddr[r], rdata[r], model[b][raddr[r]]);
      end
    end
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < N; i++) begin
        model[b][i] = DW'($urandom);
        @(negedge clk); we = 1; wbank = b[0]; waddr = TAU'(i); wdata = model[b][i];
      end
    @(negedge clk); we = 0;
    // ping-pong: rewrite one bank while reading the other
    for (int round = 0; round < 6; round++) begin
      logic wb;
      wb = round[0];
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        lookup_check(~wb);
        we = 1; wbank = wb; waddr = TAU'(i); wdata = DW'($urandom);
        @(posedge clk); #1 model[wb][i] = wdata;
      end
      @(negedge clk); we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
