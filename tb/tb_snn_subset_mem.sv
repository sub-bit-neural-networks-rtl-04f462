// tb_snn_subset_mem: self-checking test of the kernel subset memory.
// Checks the reset value, writes a random subset, reads every entry back,
// and checks that an idle write enable leaves the contents alone.
module tb_snn_subset_mem;
  import snn_pkg::*;
  localparam int TAU = 5;
  localparam int N   = 1 << TAU;

  logic clk = 0, rst_n = 0, we = 0;
  logic [TAU-1:0] waddr = '0, raddr = '0;
  bkernel_t wdata = '0, rdata;
  bkernel_t model [N];
  int checks = 0, failures = 0;

  snn_subset_mem #(.TAU(TAU)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      raddr = TAU'(i); #1;
      checks++; if (rdata != '0) begin failures++; $display("FAIL reset entry %0d", i); end
    end
    for (int i = 0; i < N; i++) begin
      model[i] = 9'($urandom);
      @(negedge clk); we = 1; waddr = TAU'(i); wdata = model[i];
    end
    @(negedge clk); we = 0; wdata = '1;
    for (int i = 0; i < N; i++) begin
      waddr = TAU'(i);
      @(negedge clk);
    end
    for (int i = 0; i < N; i++) begin
      raddr = TAU'(i); #1;
      checks++;
      if (rdata != model[i]) begin failures++; $display("FAIL entry %0d %h vs %h", i, rdata, model[i]); end
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
