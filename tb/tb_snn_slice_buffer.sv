// tb_snn_slice_buffer: self-checking test of the strip buffer and the
// overlapped 3x3 slice extraction.
// Loads random strips through the valid/ready handshake, moves them into
// use with take, and checks every PE's slice (PE p gets columns p..p+2)
// both in the take cycle (taken from the prefetched strip) and afterwards,
// and that s_ready follows the prefetch register's occupancy.
module tb_snn_slice_buffer;
  import snn_pkg::*;
  localparam int NPE = 8, ACT_W = 16, NCOL = NPE + 2;

  logic clk = 0, rst_n = 0, s_valid = 0, take = 0, s_ready, avail;
  logic signed [ACT_W-1:0] s_data [3][NCOL];
  logic signed [ACT_W-1:0] slice [NPE][KSIZE];
  logic signed [ACT_W-1:0] strip [3][NCOL];
  int checks = 0, failures = 0;

  snn_slice_buffer #(.NPE(NPE), .ACT_W(ACT_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check_slices(input string when);
    for (int p = 0; p < NPE; p++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (slice[p][3*r+c] != strip[r][p+c]) begin
            failures++; $display("FAIL %s PE %0d r%0d c%0d", when, p, r, c);
          end
        end
  endtask

  initial begin
    for (int r = 0; r < 3; r++) for (int c = 0; c < NCOL; c++) s_data[r][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!s_ready || avail) begin failures++; $display("FAIL empty after reset"); end
    for (int n = 0; n < 20; n++) begin
      for (int r = 0; r < 3; r++) for (int c = 0; c < NCOL; c++) begin
        strip[r][c] = ACT_W'($urandom);
        s_data[r][c] = strip[r][c];
      end
      s_valid = 1;
      @(negedge clk);
      s_valid = 0;
      for (int r = 0; r < 3; r++) for (int c = 0; c < NCOL; c++) s_data[r][c] = ACT_W'($urandom);
      checks++; if (s_ready || !avail) begin failures++; $display("FAIL strip not held"); end
      // a second strip offered while full must be refused
      s_valid = 1;
      @(negedge clk);
      s_valid = 0;
      take = 1; #1;
      check_slices("take cycle");
      @(negedge clk);
      take = 0;
      checks++; if (!s_ready || avail) begin failures++; $display("FAIL not emptied by take"); end
      repeat ($urandom % 3) @(negedge clk);
      check_slices("hold");
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
