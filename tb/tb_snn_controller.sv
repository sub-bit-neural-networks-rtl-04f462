// tb_snn_controller: self-checking test of the two-stage sequencer.
// Runs rounds of 1, 2 and 5 input channels, first with inputs always
// available and then with random gaps in the strip and kernel-ID supply.
// Every enabled pre-computing and accumulation cycle is checked against its
// expected kernel ID / line-buffer position, LUT bank and last flag, the
// consumed inputs are counted, and without gaps a round must take exactly
// (num_cin+1)*32 busy cycles.
module tb_snn_controller;
  import snn_pkg::*;
  localparam int TAU = 5, NACC = 4, LBW = 128, MAX_CIN = 512, SEG = 32, NK = 32;

  logic clk = 0, rst_n = 0, start = 0;
  logic [9:0] num_cin = '0;
  logic busy, done, strip_avail = 0, strip_take, w_valid = 0, w_ready;
  logic pc_en, pc_bank, acc_en, acc_bank, acc_last, stall;
  logic [TAU-1:0] pc_kidx;
  logic [4:0] acc_addr;
  int checks = 0, failures = 0;
  int n_pc, n_acc, n_take, n_w, n_busy, n_stall, n_done, cur_n;
  bit gaps;

  snn_controller #(.TAU(TAU), .NACC(NACC), .LBW(LBW), .MAX_CIN(MAX_CIN)) dut (.*);

  always #5 clk = ~clk;

  // input supply model
  always @(negedge clk) begin
    strip_avail <= gaps ? ($urandom % 3 != 0) : 1'b1;
    w_valid     <= gaps ? ($urandom % 4 != 0) : 1'b1;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s (pc=%0d acc=%0d)", msg, n_pc, n_acc);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (busy) n_busy++;
    if (stall) n_stall++;
    if (done) n_done++;
    if (strip_take) begin
      checks++;
      if (!pc_en || pc_kidx != 0 || !strip_avail) fail("strip taken outside first pre-compute cycle");
      n_take++;
    end
    if (w_ready) begin
      checks++;
      if (!acc_en || !w_valid) fail("kernel IDs taken without accumulation");
      n_w++;
    end
    if (pc_en) begin
      checks++;
      if (int'(pc_kidx) != n_pc % NK || pc_bank != 1'((n_pc / NK) % 2)) fail("pre-compute kidx/bank");
      n_pc++;
    end
    if (acc_en) begin
      checks++;
      if (int'(acc_addr) != n_acc % SEG || acc_bank != 1'((n_acc / SEG) % 2)
          || acc_last != (n_acc / SEG == cur_n - 1)) fail("accumulate addr/bank/last");
      // accumulation of channel c must follow the pre-computation of channel c
      if (n_pc < (n_acc / SEG + 1) * NK) fail("accumulation ahead of pre-computation");
      n_acc++;
    end
  end

  task automatic run_round(input int n, input bit with_gaps);
    n_pc = 0; n_acc = 0; n_take = 0; n_w = 0; n_busy = 0; n_stall = 0; n_done = 0;
    cur_n = n; gaps = with_gaps;
    @(negedge clk); start = 1; num_cin = 10'(n);
    @(negedge clk); start = 0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    checks += 5;
    if (n_pc != n * NK) fail($sformatf("pre-compute cycles %0d", n_pc));
    if (n_acc != n * SEG) fail($sformatf("accumulate cycles %0d", n_acc));
    if (n_take != n) fail($sformatf("strips taken %0d", n_take));
    if (n_w != n * SEG) fail($sformatf("kernel-ID beats %0d", n_w));
    if (n_done != 1) fail("done pulses");
    if (!with_gaps) begin
      checks++;
      if (n_busy != (n + 1) * 32) fail($sformatf("round of %0d channels took %0d cycles", n, n_busy));
      if (n_stall != 0) fail("stall without gaps");
    end else begin
      checks++;
      if (n_stall == 0) fail("no stall with gaps");
      if (n_busy != (n + 1) * 32 + n_stall) fail("busy != ideal + stalls");
    end
  endtask

  initial begin
    gaps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // num_cin = 0 is ignored
    @(negedge clk); start = 1; num_cin = '0;
    @(negedge clk); start = 0;
    checks++; if (busy) fail("started with num_cin = 0");
    run_round(1, 0);
    run_round(2, 0);
    run_round(5, 0);
    run_round(3, 1);
    run_round(5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
