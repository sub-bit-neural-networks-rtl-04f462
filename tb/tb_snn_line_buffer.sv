// tb_snn_line_buffer: self-checking test of the segmented line buffer.
// Checks that reset clears all 128 entries, that each lane writes only its
// own segment at the shared address, that writes without we are ignored,
// and that a per-cycle read-add-write accumulates correctly.
module tb_snn_line_buffer;
  import snn_pkg::*;
  localparam int NACC = 4, LBW = 128, ACC_W = 32, SEG = LBW / NACC;

  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] addr = '0;
  logic signed [ACC_W-1:0] rdata [NACC];
  logic signed [ACC_W-1:0] wdata [NACC];
  int model [LBW];
  int checks = 0, failures = 0;

  snn_line_buffer #(.NACC(NACC), .LBW(LBW), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check_all();
    for (int k = 0; k < SEG; k++) begin
      addr = 5'(k); #1;
      for (int a = 0; a < NACC; a++) begin
        checks++;
        if (int'(rdata[a]) != model[a*SEG+k]) begin
          failures++; $display("FAIL entry %0d: %0d vs %0d", a*SEG+k, rdata[a], model[a*SEG+k]);
        end
      end
    end
  endtask

  initial begin
    for (int a = 0; a < NACC; a++) wdata[a] = '0;
    for (int i = 0; i < LBW; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    // three accumulation passes of random increments
    for (int pass = 0; pass < 3; pass++) begin
      for (int k = 0; k < SEG; k++) begin
        @(negedge clk);
        addr = 5'(k); we = 1; #1;
        for (int a = 0; a < NACC; a++) begin
          int inc;
          inc = int'($urandom % 2001) - 1000;
          wdata[a] = rdata[a] + inc;
          model[a*SEG+k] += inc;
        end
      end
      @(negedge clk); we = 0;
      check_all();
    end
    // writes with we low are ignored
    @(negedge clk);
    for (int a = 0; a < NACC; a++) wdata[a] = 32'h5555;
    repeat (3) @(negedge clk);
    check_all();
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
